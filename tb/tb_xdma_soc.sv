// tb_xdma_soc: end-to-end test of the dual-cluster XDMA system at its
// default (full) size: two clusters of 4 MiB / 32 banks, D_buf = 9.
//
// Source data is written through the core ports with a known byte pattern,
// tasks are launched through the CSR ports, completion is awaited on
// tasks_done_o and the destination is read back through the core ports and
// compared with a reference computed here from the pattern alone.
//   T1 local copy in cluster 0, MN -> MNM8N8 tiling (bank conflicts)
//   T2 cluster 0 reads from cluster 1 (no grant), transposing each 8x8 tile
//      in the remote post-reader plugin
//   T3 cluster 0 writes 8 KiB to cluster 1 (grant, 2 AW bursts, finish);
//      the link rate is checked against 64 beats per 65 cycles
//   T4+T5 cluster 1 writes to cluster 0 (pre-writer transpose in cluster 0)
//      while cluster 0 writes to cluster 1: both links busy at once
//   T6 cluster 0 writes MNM8N8 tiles back to MN rows in cluster 1
//      (scatter on the remote writer)
// Each mechanism is counted and a failure is recorded if one never occurs.
module tb_xdma_soc;
  import xdma_pkg::*;

  localparam int unsigned MEM_AW = 22;
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

  // ---------------- watchdog ----------------
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_conflict = 0, n_cfg_msg = 0, n_grant = 0, n_finish = 0, n_data_aw = 0;
  int n_duplex = 0, n_link_stall = 0;
  always @(posedge clk) if (rst_n) begin
    n_conflict   += $countones(dut.g_cl[0].i_cluster.i_xbar.req_i & ~dut.g_cl[0].i_cluster.i_xbar.gnt_o);
    n_grant      += $countones(grant_rx);
    n_finish     += $countones(finish_rx);
    for (int k = 0; k < 2; k++) begin
      if (aw_fire[k] && aw_win[k] == 2'(MMIO_CFG))  n_cfg_msg++;
      if (aw_fire[k] && aw_win[k] == 2'(MMIO_DATA)) n_data_aw++;
    end
    if (w_fire[0] && w_fire[1]) n_duplex++;
    if ((dut.w_valid[0] && !dut.w_ready[0]) || (dut.w_valid[1] && !dut.w_ready[1])) n_link_stall++;
  end

  // ---------------- reference pattern ----------------
  function automatic logic [7:0] pat(int k, int unsigned a);
    return 8'((a * 7) ^ (a >> 8) ^ (a >> 13) ^ (k * 91) ^ 8'h5a);
  endfunction

  // ---------------- core port ----------------
  task automatic mem_write(int k, int unsigned a, logic [63:0] d);
    core_req[k] = 1; core_we[k] = 1; core_addr[k] = MEM_AW'(a); core_wdata[k] = d; core_strb[k] = '1;
    do @(posedge clk); while (!core_gnt[k]);
    #0.1 core_req[k] = 0; core_we[k] = 0;
  endtask

  task automatic mem_read(int k, int unsigned a, output logic [63:0] d);
    core_req[k] = 1; core_we[k] = 0; core_addr[k] = MEM_AW'(a);
    do @(posedge clk); while (!core_gnt[k]);
    #0.1 core_req[k] = 0;
    @(posedge clk);
    d = core_rdata[k];
  endtask

  task automatic fill(int k, int unsigned a, int unsigned bytes);
    for (int unsigned w = 0; w < bytes; w += 8) begin
      logic [63:0] d;
      for (int b = 0; b < 8; b++) d[b*8 +: 8] = pat(k, a + w + b);
      mem_write(k, a + w, d);
    end
  endtask

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

  // Layout helpers (8-bit elements, M x N matrix)
  function automatic side_t mn_tiles(logic [31:0] base, int m, int n, logic [31:0] pcfg);
    side_t s;   // gather/scatter: channel r <-> row r of an 8x8 tile
    s.addr = base; s.sstride = n; s.pcfg = pcfg;
    s.bounds  = '{n/8, m/8, 1, 1};
    s.strides = '{8, 8*n, 0, 0};
    return s;
  endfunction
  function automatic side_t contig(logic [31:0] base, int beats, logic [31:0] pcfg);
    side_t s;
    s.addr = base; s.sstride = 8; s.pcfg = pcfg;
    s.bounds  = '{beats, 1, 1, 1};
    s.strides = '{64, 0, 0, 0};
    return s;
  endfunction

  // Wait for a cluster's finished-task count; a task that has not finished
  // after 20000 cycles is counted as a failure and the test goes on.
  task automatic wait_done(int k, int unsigned target);
    int unsigned w;
    w = 0;
    while (tasks_done[k] < target && w < 20000) begin @(posedge clk); w++; end
    checks++;
    if (tasks_done[k] < target) begin
      failures++;
      $display("FAIL cluster %0d: task %0d not finished", k, target);
    end
  endtask

  // Expected byte of MNM8N8 tile layout built from an MN source (opt. transposed tiles)
  function automatic logic [7:0] exp_tile(int ks, int unsigned src, int n, int unsigned off, bit tr);
    int unsigned t, e, i, j, r, c;
    t = off / 64; e = off % 64; r = e / 8; c = e % 8;
    i = t / (n / 8); j = t % (n / 8);
    if (tr) return pat(ks, src + (8*i + c) * n + 8*j + r);
    return pat(ks, src + (8*i + r) * n + 8*j + c);
  endfunction

  task automatic check_region(int k, int unsigned a, int unsigned bytes, string name,
                              int ks, int unsigned src, int n, int mode);
    // mode 0: contiguous copy, 1: tiles, 2: tiles transposed, 3: transpose of contiguous tiles
    // mode 4: MN rows from contiguous tiles (inverse tiling)
    int errs = 0;
    for (int unsigned w = 0; w < bytes; w += 8) begin
      logic [63:0] d;
      mem_read(k, a + w, d);
      for (int b = 0; b < 8; b++) begin
        int unsigned off;
        logic [7:0] e;
        off = w + b;
        case (mode)
          0: e = pat(ks, src + off);
          1: e = exp_tile(ks, src, n, off, 0);
          2: e = exp_tile(ks, src, n, off, 1);
          3: e = pat(ks, src + (off / 64) * 64 + (off % 8) * 8 + (off % 64) / 8);
          default: begin
            int unsigned row, col;
            row = off / n; col = off % n;
            e = pat(ks, src + ((row / 8) * (n / 8) + col / 8) * 64 + (row % 8) * 8 + col % 8);
          end
        endcase
        if (d[b*8 +: 8] !== e) begin
          if (errs < 4) $display("%s: byte %0d got %02x expected %02x", name, off, d[b*8 +: 8], e);
          errs++;
        end
      end
    end
    checks++;
    if (errs != 0) begin failures++; $display("FAIL %s: %0d bytes wrong", name, errs); end
    else $display("ok   %s (%0d bytes)", name, bytes);
  endtask

  // ---------------- test sequence ----------------
  initial begin
    longint t0, t1, first_w, last_w;
    int beats;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    fill(0, 32'h0000, 2048);     // T1 source, 32 x 64
    fill(1, 32'h0000, 4096);     // T2 source, 64 tiles
    fill(0, 32'h10000, 8192);    // T3 source
    fill(1, 32'h10000, 2048);    // T4 source (32 tiles)
    fill(0, 32'h18000, 2048);    // T5 source
    fill(0, 32'h1C000, 2048);    // T6 source (32 tiles of a 32 x 64 matrix)

    // T1: local copy with tiling
    t0 = cycle;
    launch(0, mn_tiles(B0 + 32'h0000, 32, 64, 0), contig(B0 + 32'h4000, 32, 0));
    wait_done(0, 1);
    $display("T1 local tiling: %0d cycles for 32 beats", cycle - t0);
    check_region(0, 32'h4000, 2048, "T1 local MN->MNM8N8", 0, 32'h0000, 64, 1);

    // T2: read from remote with transpose in the remote reader's plugin
    t0 = cycle;
    launch(0, contig(B1 + 32'h0000, 64, 1), contig(B0 + 32'h8000, 64, 0));
    wait_done(0, 2);
    $display("T2 remote read: %0d cycles for 64 beats", cycle - t0);
    check_region(0, 32'h8000, 4096, "T2 read-from-remote transposed", 1, 32'h0000, 64, 3);

    // T3: write to remote, 128 beats = 2 bursts; measure the data phase
    beats = 128;
    first_w = -1; last_w = 0;
    fork
      launch(0, contig(B0 + 32'h10000, beats, 0), contig(B1 + 32'h30000, beats, 0));
      begin
        int seen = 0;
        while (seen < beats) begin
          @(posedge clk);
          if (w_fire[0] && dut.g_cl[0].i_cluster.i_xdma.i_backend.kind_q == 2'd2) begin
            if (first_w < 0) first_w = cycle;
            last_w = cycle;
            seen++;
          end
        end
      end
    join
    wait_done(0, 3);
    $display("T3 write to remote: data phase %0d cycles for %0d beats", last_w - first_w + 1, beats);
    checks++;
    if (last_w - first_w + 1 > beats + (beats + 63) / 64 + 2) begin
      failures++;
      $display("FAIL T3 rate: %0d cycles for %0d beats", last_w - first_w + 1, beats);
    end
    check_region(1, 32'h30000, 8192, "T3 write-to-remote", 0, 32'h10000, 0, 0);

    // T4 + T5: both directions at once
    fork
      launch(1, contig(B1 + 32'h10000, 32, 0), contig(B0 + 32'h20000, 32, 1));
      launch(0, contig(B0 + 32'h18000, 32, 0), contig(B1 + 32'h38000, 32, 0));
    join
    wait_done(1, 1);
    wait_done(0, 4);
    check_region(0, 32'h20000, 2048, "T4 remote write, pre-writer transpose", 1, 32'h10000, 0, 3);
    check_region(1, 32'h38000, 2048, "T5 concurrent write to remote", 0, 32'h18000, 0, 0);

    // T6: tiles back to MN rows on the remote side (writer scatter)
    launch(0, contig(B0 + 32'h1C000, 32, 0), mn_tiles(B1 + 32'h40000, 32, 64, 0));
    wait_done(0, 5);
    check_region(1, 32'h40000, 2048, "T6 MNM8N8->MN on remote writer", 0, 32'h1C000, 64, 4);

    // CSR read-back of the completion counters
    checks++;
    if (tasks_done[0] != 5 || tasks_done[1] != 1) begin
      failures++;
      $display("FAIL tasks_done = %0d/%0d", tasks_done[0], tasks_done[1]);
    end

    // ---------------- mechanism coverage ----------------
    $display("bank conflicts %0d, cfg msgs %0d, grants %0d, finishes %0d, data AWs %0d, duplex cycles %0d, link stalls %0d",
             n_conflict, n_cfg_msg, n_grant, n_finish, n_data_aw, n_duplex, n_link_stall);
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_cfg_msg  != 5) begin failures++; $display("FAIL cfg msgs %0d != 5", n_cfg_msg); end
    checks++; if (n_grant    != 4) begin failures++; $display("FAIL grants %0d != 4", n_grant); end
    checks++; if (n_finish   != 4) begin failures++; $display("FAIL finishes %0d != 4", n_finish); end
    // data bursts: T2 1, T3 2, T4 1, T5 1, T6 1
    checks++; if (n_data_aw  != 6) begin failures++; $display("FAIL data bursts %0d != 6", n_data_aw); end
    checks++; if (n_duplex   == 0) begin failures++; $display("FAIL links never busy together"); end

    $display("finished after %0d cycles", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
