// tb_xdma_workloads: the evaluated data movements, run on the full-size
// dual-cluster system (no parameter overrides: 2 x 4 MiB, 32 banks,
// D_buf = 9). Every transfer goes from cluster 0 to cluster 1 and is issued
// by cluster 0 (write to remote: cfg, grant, data, finish).
//   R1-R3  matrix reshape MN -> MNM8N8 / MNM8N16 / MNM8N32, 128 x 128
//   R4     matrix reshape MNM8N32 -> MN, 128 x 128
//   R5     matrix reshape MN -> MNM8N8, 512 x 512 (largest reshape size)
//   P1     KV-cache prefill 1: 2048 x 512, MNM8N8 -> MN
//   P2     KV-cache prefill 2: 2048 x 512, MN -> MNM8N8
//   L1-L3  KV-cache load: 2048 / 4096 / 8192 x 512 in MNM8N8, transposed
//          on the way (tile order by the address generators, the tiles
//          themselves by the post-reader transposer). L3 fills all 4 MiB
//          of both clusters.
// Elements are bytes. Layout MNM8N<T> stores the matrix as 8 x T tiles in
// row-major tile order, each tile row-major. The source memory is loaded
// and the destination read back directly through the bank arrays, so the
// test time is spent on the transfers. Every destination byte is compared
// with the source byte it must come from, and the cycles from launch to
// completion are reported as beats per cycle. The transposing loads read
// and write whole tiles (no bank conflicts) and must reach 0.9 beats per
// cycle. The reshapes gather or scatter rows whose words fall into the same
// bank for all eight channels of a beat (rows 128 or 512 bytes apart); the
// per-channel buffers let the channels drift apart until they use different
// banks, and these transfers must reach 0.8 beats per cycle.
module tb_xdma_workloads;
  import xdma_pkg::*;

  localparam int unsigned MEM_AW = 22;
  localparam int unsigned ROWS   = 16384;
  localparam logic [31:0] B0 = 32'h1000_0000;
  localparam logic [31:0] B1 = 32'h1040_0000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [1:0]               core_req = '0, core_we = '0;
  logic [1:0][MEM_AW-1:0]   core_addr = '0;
  logic [1:0][63:0]         core_wdata = '0;
  logic [1:0][7:0]          core_strb = '0;
  logic [1:0]               core_gnt, core_rvalid;
  logic [1:0][63:0]         core_rdata;
  logic [1:0]               csr_valid = '0, csr_ready, csr_we = '0;
  logic [1:0][7:0]          csr_addr = '0;
  logic [1:0][31:0]         csr_wdata = '0, csr_rdata, tasks_done;
  logic [1:0]               aw_fire, w_fire, grant_rx, finish_rx;
  logic [1:0][1:0]          aw_win;

  xdma_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_we_i(core_we), .core_addr_i(core_addr),
    .core_wdata_i(core_wdata), .core_strb_i(core_strb),
    .core_gnt_o(core_gnt), .core_rvalid_o(core_rvalid), .core_rdata_o(core_rdata),
    .csr_valid_i(csr_valid), .csr_ready_o(csr_ready), .csr_we_i(csr_we),
    .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .tasks_done_o(tasks_done),
    .link_aw_fire_o(aw_fire), .link_aw_window_o(aw_win), .link_w_fire_o(w_fire),
    .grant_rx_o(grant_rx), .finish_rx_o(finish_rx)
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- direct access to the bank arrays ----------------
  // shadow[k][bank][row] mirrors cluster k's memory; byte address a lives in
  // bank a[7:3], row a[21:8], byte lane a[2:0].
  logic [63:0] shadow [2][32][ROWS];
  event        ev_load, ev_store;
  int          bd_k;

  for (genvar k = 0; k < 2; k++) begin : g_bd
    for (genvar b = 0; b < 32; b++) begin : g_bank
      always @(ev_load) if (bd_k == k)
        for (int r = 0; r < ROWS; r++) dut.g_cl[k].i_cluster.g_bank[b].i_bank.mem_q[r] = shadow[k][b][r];
      always @(ev_store) if (bd_k == k)
        for (int r = 0; r < ROWS; r++) shadow[k][b][r] = dut.g_cl[k].i_cluster.g_bank[b].i_bank.mem_q[r];
    end
  end

  task automatic load_mem(int k);
    bd_k = k; -> ev_load; #0.5;
  endtask
  task automatic store_mem(int k);
    bd_k = k; -> ev_store; #0.5;
  endtask

  function automatic logic [7:0] byte_at(int k, int unsigned a);
    return shadow[k][(a >> 3) & 31][a >> 8][(a & 7) * 8 +: 8];
  endfunction

  function automatic logic [7:0] pat(int unsigned a);
    return 8'((a * 13) ^ (a >> 7) ^ (a >> 15) ^ 8'h3c);
  endfunction

  // byte offset of element (m, n) of an M x N matrix; t = 0: MN, else MNM8N<t>
  function automatic int unsigned lay(int t, int unsigned n_cols, int unsigned m, int unsigned n);
    if (t == 0) return m * n_cols + n;
    return ((m / 8) * (n_cols / t) + n / t) * (8 * t) + (m % 8) * t + n % t;
  endfunction

  // ---------------- CSR port ----------------
  task automatic csr_wr(int k, int idx, logic [31:0] v);
    csr_valid[k] = 1; csr_we[k] = 1; csr_addr[k] = 8'(idx); csr_wdata[k] = v;
    do @(posedge clk); while (!csr_ready[k]);
    #0.1 csr_valid[k] = 0; csr_we[k] = 0;
  endtask

  typedef struct {
    logic [31:0] addr, sstride;
    logic [31:0] bounds[4];
    logic [31:0] strides[4];
    logic [31:0] pcfg;
  } side_t;

  task automatic launch(int k, side_t s, side_t d);
    csr_wr(k, 0, s.addr); csr_wr(k, 1, s.sstride);
    for (int i = 0; i < 4; i++) begin csr_wr(k, 2+i, s.bounds[i]); csr_wr(k, 6+i, s.strides[i]); end
    csr_wr(k, 10, s.pcfg);
    csr_wr(k, 11, d.addr); csr_wr(k, 12, d.sstride);
    for (int i = 0; i < 4; i++) begin csr_wr(k, 13+i, d.bounds[i]); csr_wr(k, 17+i, d.strides[i]); end
    csr_wr(k, 21, d.pcfg);
    csr_wr(k, 22, 0);
  endtask

  // Walk of an M x N matrix in 8 x 8 sub-blocks, ordered (sub-block within
  // a T-wide tile, tile column, tile row). t is the layout of this side, tt
  // the tile width the walk follows (the MNM8N<tt> side of the transfer).
  function automatic side_t walk(logic [31:0] base, int t, int tt, int m, int n);
    side_t s;
    s.addr = base; s.pcfg = 0;
    s.bounds  = '{tt / 8, n / tt, m / 8, 1};
    if (t == 0) begin
      s.sstride = n;
      s.strides = '{8, tt, 8 * n, 0};
    end else begin
      s.sstride = t;
      s.strides = '{8, 8 * t, 8 * n, 0};
    end
    return s;
  endfunction

  // ---------------- one transfer ----------------
  int unsigned n_done = 0;

  task automatic run(string name, side_t s, side_t d, int unsigned beats, real min_rate);
    longint t0;
    int w;
    real rate;
    // clear the destination cluster so that no earlier result can pass
    for (int bk = 0; bk < 32; bk++) for (int r = 0; r < ROWS; r++) shadow[1][bk][r] = '0;
    load_mem(1);
    launch(0, s, d);
    t0 = cycle;
    w = 0;
    while (tasks_done[0] <= n_done && w < 400000) begin @(posedge clk); w++; end
    n_done++;
    rate = real'(beats) / real'(cycle - t0);
    $display("%-34s %6d beats in %7d cycles: %.3f beats/cycle", name, beats, cycle - t0, rate);
    checks++;
    if (tasks_done[0] < n_done) begin failures++; $display("FAIL %s: not finished", name); end
    if (min_rate > 0.0) begin
      checks++;
      if (rate < min_rate) begin failures++; $display("FAIL %s: rate below %.2f", name, min_rate); end
    end
    repeat (4) @(posedge clk);
    store_mem(1);
  endtask

  // every element of the destination layout must equal the same element of
  // the source layout
  task automatic check_reshape(string name, int ts, int td, int m, int n);
    int bad = 0;
    for (int unsigned i = 0; i < m; i++)
      for (int unsigned j = 0; j < n; j++)
        if (byte_at(1, lay(td, n, i, j)) !== pat(lay(ts, n, i, j))) begin
          if (bad < 3) $display("FAIL %s: element (%0d,%0d)", name, i, j);
          bad++;
        end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d elements wrong", name, bad); end
  endtask

  task automatic check_transpose(string name, int m, int n);
    int bad = 0;
    for (int unsigned i = 0; i < m; i++)
      for (int unsigned j = 0; j < n; j++)
        if (byte_at(1, lay(8, m, j, i)) !== pat(lay(8, n, i, j))) begin
          if (bad < 3) $display("FAIL %s: element (%0d,%0d)", name, i, j);
          bad++;
        end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d elements wrong", name, bad); end
  endtask

  task automatic reshape(string name, int ts, int td, int m, int n);
    int tt;
    tt = (ts != 0) ? ts : td;
    run(name, walk(B0, ts, tt, m, n), walk(B1, td, tt, m, n), m * n / 64, 0.8);
    check_reshape(name, ts, td, m, n);
  endtask

  // MNM8N8 M x N -> MNM8N8 N x M, tiles transposed by the source plugin
  task automatic kv_load(string name, int m, int n);
    side_t s, d;
    s.addr = B0; s.sstride = 8; s.pcfg = 1;
    s.bounds  = '{m / 8, n / 8, 1, 1};
    s.strides = '{8 * n, 64, 0, 0};
    d.addr = B1; d.sstride = 8; d.pcfg = 0;
    d.bounds  = '{m / 8, n / 8, 1, 1};
    d.strides = '{64, 8 * m, 0, 0};
    run(name, s, d, m * n / 64, 0.9);
    check_transpose(name, m, n);
  endtask

  initial begin
    for (int unsigned a = 0; a < (1 << MEM_AW); a += 8)
      for (int b = 0; b < 8; b++)
        shadow[0][(a >> 3) & 31][a >> 8][b * 8 +: 8] = pat(a + b);
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    load_mem(0);
    repeat (2) @(posedge clk);

    reshape("R1 reshape MN->MNM8N8 128x128",   0,  8, 128, 128);
    reshape("R2 reshape MN->MNM8N16 128x128",  0, 16, 128, 128);
    reshape("R3 reshape MN->MNM8N32 128x128",  0, 32, 128, 128);
    reshape("R4 reshape MNM8N32->MN 128x128", 32,  0, 128, 128);
    reshape("R5 reshape MN->MNM8N8 512x512",   0,  8, 512, 512);
    reshape("P1 prefill MNM8N8->MN 2048x512",  8,  0, 2048, 512);
    reshape("P2 prefill MN->MNM8N8 2048x512",  0,  8, 2048, 512);
    kv_load("L1 load transpose 2048x512", 2048, 512);
    kv_load("L2 load transpose 4096x512", 4096, 512);
    kv_load("L3 load transpose 8192x512", 8192, 512);

    $display("finished after %0d cycles", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
