// tb_xdma_dbuf: effect of the channel buffer depth D_buf on a layout
// transformation. Three full-size dual-cluster systems that differ only in
// D_buf (3, 5 and 9, the three depths the design was evaluated with) run
// the same transfers side by side, each from cluster 0 to cluster 1:
//   A  MN -> MNM8N8 of a 512 x 512 byte matrix (gather of rows 512 bytes
//      apart: all eight channels of a beat start in the same bank)
//   B  MNM8N8 -> MN of the same matrix (the scatter counterpart)
// Each destination is compared element by element with the source, and the
// beats per cycle of every run are reported. A deeper buffer lets the
// channels drift further apart and avoid more bank conflicts, so the rate
// must not fall as D_buf grows, and D_buf = 9 must beat D_buf = 3.
module tb_xdma_dbuf;
  import xdma_pkg::*;

  localparam int unsigned MEM_AW = 22;
  localparam int unsigned ROWS   = 16384;
  localparam int          NSYS   = 3;
  localparam int          DEPTH [NSYS] = '{3, 5, 9};
  localparam logic [31:0] B0 = 32'h1000_0000;
  localparam logic [31:0] B1 = 32'h1040_0000;
  localparam int unsigned M = 512, N = 512;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [NSYS-1:0][1:0]        csr_valid = '0, csr_ready, csr_we = '0;
  logic [NSYS-1:0][1:0][7:0]   csr_addr = '0;
  logic [NSYS-1:0][1:0][31:0]  csr_wdata = '0, csr_rdata, tasks_done;

  for (genvar j = 0; j < NSYS; j++) begin : g_sys
    logic [1:0]             core_gnt, core_rvalid, aw_fire, w_fire, grant_rx, finish_rx;
    logic [1:0][63:0]       core_rdata;
    logic [1:0][1:0]        aw_win;
    xdma_soc #(.D_BUF(DEPTH[j])) dut (
      .clk_i(clk), .rst_ni(rst_n),
      .core_req_i('0), .core_we_i('0), .core_addr_i('0), .core_wdata_i('0), .core_strb_i('0),
      .core_gnt_o(core_gnt), .core_rvalid_o(core_rvalid), .core_rdata_o(core_rdata),
      .csr_valid_i(csr_valid[j]), .csr_ready_o(csr_ready[j]), .csr_we_i(csr_we[j]),
      .csr_addr_i(csr_addr[j]), .csr_wdata_i(csr_wdata[j]), .csr_rdata_o(csr_rdata[j]),
      .tasks_done_o(tasks_done[j]),
      .link_aw_fire_o(aw_fire), .link_aw_window_o(aw_win), .link_w_fire_o(w_fire),
      .grant_rx_o(grant_rx), .finish_rx_o(finish_rx)
    );
  end

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- direct access to the bank arrays ----------------
  // src: the common source image of cluster 0; dst[j]: cluster 1 of system j
  logic [63:0] src [32][ROWS];
  logic [63:0] dst [NSYS][32][ROWS];
  event        ev_load, ev_clear, ev_store;

  for (genvar j = 0; j < NSYS; j++) begin : g_bd
    for (genvar b = 0; b < 32; b++) begin : g_bank
      always @(ev_load)
        for (int r = 0; r < ROWS; r++) g_sys[j].dut.g_cl[0].i_cluster.g_bank[b].i_bank.mem_q[r] = src[b][r];
      always @(ev_clear)
        for (int r = 0; r < ROWS; r++) g_sys[j].dut.g_cl[1].i_cluster.g_bank[b].i_bank.mem_q[r] = '0;
      always @(ev_store)
        for (int r = 0; r < ROWS; r++) dst[j][b][r] = g_sys[j].dut.g_cl[1].i_cluster.g_bank[b].i_bank.mem_q[r];
    end
  end

  function automatic logic [7:0] pat(int unsigned a);
    return 8'((a * 13) ^ (a >> 7) ^ (a >> 15) ^ 8'h3c);
  endfunction

  function automatic logic [7:0] dst_byte(int j, int unsigned a);
    return dst[j][(a >> 3) & 31][a >> 8][(a & 7) * 8 +: 8];
  endfunction

  // byte offset of element (m, n): t = 0 row-major MN, t = 8 MNM8N8 tiles
  function automatic int unsigned lay(int t, int unsigned m, int unsigned n);
    if (t == 0) return m * N + n;
    return ((m / 8) * (N / 8) + n / 8) * 64 + (m % 8) * 8 + n % 8;
  endfunction

  // ---------------- CSR port ----------------
  task automatic csr_wr(int j, int idx, logic [31:0] v);
    csr_valid[j][0] = 1; csr_we[j][0] = 1; csr_addr[j][0] = 8'(idx); csr_wdata[j][0] = v;
    do @(posedge clk); while (!csr_ready[j][0]);
    #0.1 csr_valid[j][0] = 0; csr_we[j][0] = 0;
  endtask

  // one half of the task: walk in 8x8 blocks, tile column inner, tile row outer
  task automatic program_side(int j, int o, logic [31:0] base, int t);
    csr_wr(j, o + 0, base);
    csr_wr(j, o + 1, (t == 0) ? N : 8);                 // spatial stride: row pitch
    csr_wr(j, o + 2, N / 8);  csr_wr(j, o + 3, M / 8);
    csr_wr(j, o + 4, 1);      csr_wr(j, o + 5, 1);
    csr_wr(j, o + 6, (t == 0) ? 8 : 64);
    csr_wr(j, o + 7, 8 * N);
    csr_wr(j, o + 8, 0);      csr_wr(j, o + 9, 0);
    csr_wr(j, o + 10, 0);
  endtask

  real rate [NSYS];

  task automatic run_one(int j, int ts, int td, int unsigned target);
    longint t0;
    program_side(j, 0, B0, ts);
    program_side(j, 11, B1, td);
    csr_wr(j, 22, 0);
    t0 = cycle;
    while (tasks_done[j][0] < target) @(posedge clk);
    rate[j] = real'(M * N / 64) / real'(cycle - t0);
  endtask

  task automatic run_all(string name, int ts, int td, int unsigned target);
    -> ev_clear; #0.5;
    fork
      run_one(0, ts, td, target);
      run_one(1, ts, td, target);
      run_one(2, ts, td, target);
    join
    repeat (4) @(posedge clk);
    -> ev_store; #0.5;
    for (int j = 0; j < NSYS; j++) begin
      int bad = 0;
      for (int unsigned m = 0; m < M; m++)
        for (int unsigned n = 0; n < N; n++)
          if (dst_byte(j, lay(td, m, n)) !== pat(lay(ts, m, n))) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL %s, D_buf %0d: %0d elements wrong", name, DEPTH[j], bad); end
      $display("%s  D_buf %0d: %.3f beats/cycle", name, DEPTH[j], rate[j]);
    end
    checks++;
    if (rate[1] < rate[0] || rate[2] < rate[1] || rate[2] <= rate[0]) begin
      failures++;
      $display("FAIL %s: rate does not grow with D_buf", name);
    end
    $display("%s  D_buf 9 vs 3: %.2fx, 9 vs 5: %.2fx", name, rate[2] / rate[0], rate[2] / rate[1]);
  endtask

  initial begin
    for (int unsigned a = 0; a < (1 << MEM_AW); a += 8)
      for (int b = 0; b < 8; b++) src[(a >> 3) & 31][a >> 8][b * 8 +: 8] = pat(a + b);
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    -> ev_load; #0.5;
    repeat (2) @(posedge clk);

    run_all("A MN->MNM8N8 512x512", 0, 8, 1);
    run_all("B MNM8N8->MN 512x512", 8, 0, 2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
