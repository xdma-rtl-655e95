// tb_xdma_backend: two backends joined master-to-slave in both directions,
// as two clusters' XDMAs are. The testbench plays both controllers and both
// frontends:
//   1 unit A sends a cfg record: it must come out of unit B's cfg port with
//     from_remote set, through the CFG window of B's address range;
//   2 unit A announces a 150-beat transfer that needs a grant: no data may
//     cross before B sends its grant message; the data must arrive in order
//     under random back-pressure, in bursts of at most 64 beats (64, 64, 22),
//     and tx_done must pulse exactly once, with the last beat;
//   3 unit B sends finish: A's finish pulse fires once;
//   4 a 128-beat transfer without grant and without back-pressure must run at
//     the link rate apart from the per-burst address cycles.
// Inputs change after the falling edge; handshakes are counted on the
// rising edge.
module tb_xdma_backend;
  import xdma_pkg::*;
  localparam logic [31:0] BASE_A = 32'h1000_0000;
  localparam logic [31:0] BASE_B = 32'h1040_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // controller / frontend side of unit A (sender) and unit B (receiver)
  logic       a_cfg_v = 0, a_cfg_r, a_meta_v = 0, a_meta_r, a_tx_done, a_msg_v = 0, a_msg_r;
  xdma_cfg_t  a_cfg = '0, b_cfg_rx;
  tx_meta_t   a_meta = '0;
  ctrl_msg_t  a_msg = '0, b_msg = '0;
  logic       a_fin, a_grant, b_fin, b_grant;
  logic       a_tx_v = 0, a_tx_r, b_rx_v, b_rx_r = 0, b_cfg_v, b_cfg_r = 0, b_msg_v = 0, b_msg_r;
  logic [511:0] a_tx_d = '0, b_rx_d;
  // links
  logic       ab_aw_v, ab_aw_r, ab_w_v, ab_w_r, ab_b_v, ab_b_r;
  logic       ba_aw_v, ba_aw_r, ba_w_v, ba_w_r, ba_b_v, ba_b_r;
  axi_aw_t    ab_aw, ba_aw;
  axi_w_t     ab_w, ba_w;
  axi_b_t     ab_b, ba_b;
  // unused ports of the idle directions
  xdma_cfg_t  a_cfg_rx;
  logic       a_cfg_rx_v, b_cfg_tx_r, b_meta_r, b_tx_done, b_tx_r, a_rx_v;
  logic [511:0] a_rx_d;
  int checks = 0, failures = 0;

  xdma_backend #(.MEM_SIZE(32'h0040_0000)) u_a (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_tx_valid_i(a_cfg_v), .cfg_tx_ready_o(a_cfg_r), .cfg_tx_i(a_cfg),
    .cfg_rx_valid_o(a_cfg_rx_v), .cfg_rx_ready_i(1'b1), .cfg_rx_o(a_cfg_rx),
    .meta_valid_i(a_meta_v), .meta_ready_o(a_meta_r), .meta_i(a_meta), .tx_done_o(a_tx_done),
    .msg_valid_i(a_msg_v), .msg_ready_o(a_msg_r), .msg_i(a_msg),
    .finish_rx_o(a_fin), .grant_rx_o(a_grant),
    .tx_valid_i(a_tx_v), .tx_ready_o(a_tx_r), .tx_data_i(a_tx_d),
    .rx_valid_o(a_rx_v), .rx_ready_i(1'b1), .rx_data_o(a_rx_d),
    .m_aw_valid_o(ab_aw_v), .m_aw_ready_i(ab_aw_r), .m_aw_o(ab_aw),
    .m_w_valid_o(ab_w_v), .m_w_ready_i(ab_w_r), .m_w_o(ab_w),
    .m_b_valid_i(ab_b_v), .m_b_ready_o(ab_b_r),
    .s_aw_valid_i(ba_aw_v), .s_aw_ready_o(ba_aw_r), .s_aw_i(ba_aw),
    .s_w_valid_i(ba_w_v), .s_w_ready_o(ba_w_r), .s_w_i(ba_w),
    .s_b_valid_o(ba_b_v), .s_b_ready_i(ba_b_r), .s_b_o(ba_b));

  xdma_backend #(.MEM_SIZE(32'h0040_0000)) u_b (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_tx_valid_i(1'b0), .cfg_tx_ready_o(b_cfg_tx_r), .cfg_tx_i('0),
    .cfg_rx_valid_o(b_cfg_v), .cfg_rx_ready_i(b_cfg_r), .cfg_rx_o(b_cfg_rx),
    .meta_valid_i(1'b0), .meta_ready_o(b_meta_r), .meta_i('0), .tx_done_o(b_tx_done),
    .msg_valid_i(b_msg_v), .msg_ready_o(b_msg_r), .msg_i(b_msg),
    .finish_rx_o(b_fin), .grant_rx_o(b_grant),
    .tx_valid_i(1'b0), .tx_ready_o(b_tx_r), .tx_data_i('0),
    .rx_valid_o(b_rx_v), .rx_ready_i(b_rx_r), .rx_data_o(b_rx_d),
    .m_aw_valid_o(ba_aw_v), .m_aw_ready_i(ba_aw_r), .m_aw_o(ba_aw),
    .m_w_valid_o(ba_w_v), .m_w_ready_i(ba_w_r), .m_w_o(ba_w),
    .m_b_valid_i(ba_b_v), .m_b_ready_o(ba_b_r),
    .s_aw_valid_i(ab_aw_v), .s_aw_ready_o(ab_aw_r), .s_aw_i(ab_aw),
    .s_w_valid_i(ab_w_v), .s_w_ready_o(ab_w_r), .s_w_i(ab_w),
    .s_b_valid_o(ab_b_v), .s_b_ready_i(ab_b_r), .s_b_o(ab_b));

  function automatic logic [511:0] beat(int i);
    logic [511:0] d;
    for (int k = 0; k < 16; k++) d[k*32 +: 32] = 32'(i) * 32'h9e37_79b9 + 32'(k);
    return d;
  endfunction

  // ---------------- monitor ----------------
  int n_src = 0, n_src_lim = 0, n_rx = 0, n_tx_done = 0, n_grant = 0, n_fin = 0;
  int n_data_w = 0, n_cfg_rx = 0;
  int aw_len[$];
  logic [1:0] aw_win[$];
  logic [31:0] aw_addr[$];
  xdma_cfg_t cfg_got;

  always @(posedge clk) if (rst_n) begin
    if (a_tx_v && a_tx_r) n_src++;
    if (b_rx_v && b_rx_r) begin
      checks++;
      if (b_rx_d !== beat(n_rx)) begin failures++; $display("FAIL: beat %0d wrong", n_rx); end
      n_rx++;
    end
    if (ab_aw_v && ab_aw_r) begin
      aw_len.push_back(int'(ab_aw.len) + 1);
      aw_win.push_back(ab_aw.addr[MMIO_LSB +: 2]);
      aw_addr.push_back(ab_aw.addr);
    end
    if (ab_w_v && ab_w_r && aw_win[$] == 2'(MMIO_DATA)) n_data_w++;
    if (b_cfg_v && b_cfg_r) begin n_cfg_rx++; cfg_got = b_cfg_rx; end
    if (a_tx_done) n_tx_done++;
    if (a_grant) n_grant++;
    if (a_fin) n_fin++;
  end

  // data source of unit A: random gaps, stops at n_src_lim
  bit src_random = 1, sink_random = 1;
  always @(negedge clk) begin
    a_tx_v = (n_src < n_src_lim) && (!src_random || $urandom_range(0, 3) != 0);
    a_tx_d = beat(n_src);
    b_rx_r = !sink_random || ($urandom_range(0, 2) != 0);
    b_cfg_r = ($urandom_range(0, 1) != 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int t0, t1, cyc;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1: cfg record ----
    a_cfg = '0;
    a_cfg.is_src = 1; a_cfg.addr = BASE_B + 32'h1230; a_cfg.peer_addr = BASE_A + 32'h40;
    a_cfg.sstride = 32'd8; a_cfg.bounds = {16'd1, 16'd2, 16'd3, 16'd4}; a_cfg.plugin_cfg = 8'h1;
    @(negedge clk); a_cfg_v = 1;
    #1; while (!a_cfg_r) begin @(negedge clk); #1; end
    @(negedge clk); a_cfg_v = 0;
    while (n_cfg_rx == 0) @(negedge clk);
    begin
      xdma_cfg_t exp;
      exp = a_cfg; exp.from_remote = 1;
      chk(cfg_got == exp, "cfg record arrives with from_remote set");
    end
    chk(aw_addr[0] == (BASE_B | (32'(MMIO_CFG) << MMIO_LSB)) && aw_len[0] == 1, "cfg uses B's CFG window, one beat");

    // ---- 2: 150 beats behind a grant ----
    @(negedge clk);
    a_meta.peer_addr = BASE_B + 32'h8000; a_meta.n_beats = 150; a_meta.need_grant = 1;
    a_meta_v = 1;
    #1; while (!a_meta_r) begin @(negedge clk); #1; end
    @(negedge clk); a_meta_v = 0;
    n_src_lim = 150;
    repeat (40) @(negedge clk);
    chk(n_data_w == 0 && n_src == 0, "no data before the grant");
    b_msg.is_finish = 0; b_msg.peer_addr = BASE_A + 32'h40; b_msg_v = 1;
    #1; while (!b_msg_r) begin @(negedge clk); #1; end
    @(negedge clk); b_msg_v = 0;
    while (n_rx < 150) @(negedge clk);
    repeat (10) @(negedge clk);
    chk(n_grant == 1, "one grant received");
    chk(n_tx_done == 1, "tx_done pulses once");
    chk(aw_len.size() == 4 && aw_len[1] == 64 && aw_len[2] == 64 && aw_len[3] == 22,
        "bursts of 64, 64 and 22 beats");
    chk(aw_win[1] == 2'(MMIO_DATA) && aw_addr[1][31:22] == BASE_B[31:22], "data window of B");
    chk(n_rx == 150 && n_data_w == 150, "all beats delivered");

    // ---- 3: finish ----
    @(negedge clk);
    b_msg.is_finish = 1; b_msg_v = 1;
    #1; while (!b_msg_r) begin @(negedge clk); #1; end
    @(negedge clk); b_msg_v = 0;
    repeat (10) @(negedge clk);
    chk(n_fin == 1 && n_grant == 1, "finish received once");

    // ---- 4: link rate ----
    src_random = 0; sink_random = 0;
    @(negedge clk);
    a_meta.n_beats = 128; a_meta.need_grant = 0; a_meta_v = 1;
    n_src = 0; n_rx = 0; n_src_lim = 128;
    #1; while (!a_meta_r) begin @(negedge clk); #1; end
    t0 = cyc;
    @(negedge clk); a_meta_v = 0;
    while (n_tx_done < 2) @(negedge clk);
    t1 = cyc;
    repeat (5) @(negedge clk);
    chk(n_rx == 128, "second transfer complete");
    // 128 beats + per burst one arbitration and one address cycle
    chk(t1 - t0 <= 128 + 2 * 2 + 2, $sformatf("128 beats took %0d cycles", t1 - t0));
    $display("128 beats in %0d cycles", t1 - t0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
