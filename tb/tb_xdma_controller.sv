// tb_xdma_controller: the controller alone, with the frontend and the
// backend replaced by the testbench. A monitor logs every handshake the
// controller makes (reader start, writer start, cfg to the peer, transfer
// metadata, grant/finish messages); the stimulus then checks these logs
// against the expected records for each orchestration case:
//   1 local copy              reader and writer start, no cfg leaves;
//   2 write to remote         dst record sent, reader streams with
//                             need_grant, the task ends only on finish;
//   3 read from remote        src record sent, writer waits for the data;
//   4 peer reads from us      received src record starts the reader,
//                             need_grant clear, no task counted;
//   5 peer writes to us       received dst record starts the writer, a
//                             grant message goes out, a finish after the data;
//   6 a received record whose address is not ours is dropped.
// The ready inputs from the backend toggle at random. Inputs change after
// the falling edge; the monitor samples on the rising edge.
module tb_xdma_controller;
  import xdma_pkg::*;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam logic [31:0] PEER = 32'h1040_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        csr_valid = 0, csr_ready, csr_we = 0;
  logic [7:0]  csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata;
  logic        cfg_tx_valid, cfg_tx_ready = 0, cfg_rx_valid = 0, cfg_rx_ready;
  xdma_cfg_t   cfg_tx, cfg_rx = '0, rd_cfg, wr_cfg;
  logic        rd_start, rd_to_remote, rd_done = 0, wr_start, wr_from_remote, wr_done = 0;
  logic        meta_valid, meta_ready = 0, tx_done = 0, msg_valid, msg_ready = 0, finish_rx = 0;
  tx_meta_t    meta;
  ctrl_msg_t   msg;
  logic [31:0] tasks_done, dropped;
  int checks = 0, failures = 0;

  xdma_controller #(.MEM_BASE(BASE)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_valid_i(csr_valid), .csr_ready_o(csr_ready), .csr_we_i(csr_we), .csr_addr_i(csr_addr),
    .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .cfg_tx_valid_o(cfg_tx_valid), .cfg_tx_ready_i(cfg_tx_ready), .cfg_tx_o(cfg_tx),
    .cfg_rx_valid_i(cfg_rx_valid), .cfg_rx_ready_o(cfg_rx_ready), .cfg_rx_i(cfg_rx),
    .rd_start_o(rd_start), .rd_cfg_o(rd_cfg), .rd_to_remote_o(rd_to_remote), .rd_done_i(rd_done),
    .wr_start_o(wr_start), .wr_cfg_o(wr_cfg), .wr_from_remote_o(wr_from_remote), .wr_done_i(wr_done),
    .tx_meta_valid_o(meta_valid), .tx_meta_ready_i(meta_ready), .tx_meta_o(meta), .tx_done_i(tx_done),
    .msg_valid_o(msg_valid), .msg_ready_i(msg_ready), .msg_o(msg), .finish_rx_i(finish_rx),
    .tasks_done_o(tasks_done), .cfg_dropped_o(dropped));

  // ---------------- handshake logs ----------------
  xdma_cfg_t rd_log[$], wr_log[$], tx_log[$];
  logic      rd_rem_log[$], wr_rem_log[$];
  tx_meta_t  meta_log[$];
  ctrl_msg_t msg_log[$];

  always @(posedge clk) if (rst_n) begin
    if (rd_start) begin rd_log.push_back(rd_cfg); rd_rem_log.push_back(rd_to_remote); end
    if (wr_start) begin wr_log.push_back(wr_cfg); wr_rem_log.push_back(wr_from_remote); end
    if (cfg_tx_valid && cfg_tx_ready) tx_log.push_back(cfg_tx);
    if (meta_valid && meta_ready) meta_log.push_back(meta);
    if (msg_valid && msg_ready) msg_log.push_back(msg);
  end

  // random readiness of the backend
  always @(negedge clk) begin
    cfg_tx_ready = ($urandom_range(0, 3) != 0);
    meta_ready   = ($urandom_range(0, 2) != 0);
    msg_ready    = ($urandom_range(0, 2) != 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic csr_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    csr_valid = 1; csr_we = 1; csr_addr = a; csr_wdata = d;
    #1;
    while (!csr_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    csr_valid = 0; csr_we = 0;
  endtask

  // program both halves of a task and launch it
  task automatic launch(logic [31:0] src, logic [31:0] dst, logic [3:0][15:0] b, logic [7:0] pin, logic [7:0] pout);
    csr_wr(0, src);   csr_wr(1, 32'd8);
    for (int d = 0; d < 4; d++) begin csr_wr(8'(2 + d), 32'(b[d])); csr_wr(8'(6 + d), 32'(64 * (d + 1))); end
    csr_wr(10, 32'(pin));
    csr_wr(11, dst);  csr_wr(12, 32'd16);
    for (int d = 0; d < 4; d++) begin csr_wr(8'(13 + d), 32'(b[d])); csr_wr(8'(17 + d), 32'(128 * (d + 1))); end
    csr_wr(21, 32'(pout));
    csr_wr(22, 32'd0);
  endtask

  function automatic bit rec_ok(xdma_cfg_t c, bit is_src, bit from_remote, logic [31:0] addr,
                                logic [31:0] peer, logic [3:0][15:0] b, logic [7:0] pcfg);
    bit ok;
    ok = (c.is_src == is_src) && (c.from_remote == from_remote) && (c.addr == addr) &&
         (c.peer_addr == peer) && (c.plugin_cfg == pcfg) &&
         (c.sstride == (is_src ? 32'd8 : 32'd16));
    for (int d = 0; d < 4; d++)
      ok &= (c.bounds[d] == b[d]) && (c.strides[d] == 32'((is_src ? 64 : 128) * (d + 1)));
    return ok;
  endfunction

  task automatic wait_n(ref xdma_cfg_t q[$], input int n);
    while (q.size() < n) @(negedge clk);
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1;
    @(negedge clk); s = 0;
  endtask

  xdma_cfg_t c;
  logic [3:0][15:0] bnd;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    bnd = {16'd1, 16'd2, 16'd3, 16'd4};   // 24 beats

    // ---- 1: local copy ----
    launch(BASE + 32'h100, BASE + 32'h8000, bnd, 8'h1, 8'h0);
    wait_n(rd_log, 1); wait_n(wr_log, 1);
    chk(rec_ok(rd_log[0], 1, 0, BASE + 32'h100, BASE + 32'h8000, bnd, 8'h1) && !rd_rem_log[0], "local: reader record");
    chk(rec_ok(wr_log[0], 0, 0, BASE + 32'h8000, BASE + 32'h100, bnd, 8'h0) && !wr_rem_log[0], "local: writer record");
    repeat (10) @(negedge clk);
    chk(tx_log.size() == 0 && meta_log.size() == 0, "local: nothing sent to the peer");
    pulse(rd_done);
    repeat (3) @(negedge clk);
    chk(tasks_done == 0, "local: not done before the writer");
    pulse(wr_done);
    repeat (2) @(negedge clk);
    chk(tasks_done == 1, "local: task counted");

    // ---- 2: write to remote ----
    launch(BASE + 32'h200, PEER + 32'h300, bnd, 8'h0, 8'h1);
    wait_n(tx_log, 1); wait_n(rd_log, 2);
    chk(rec_ok(tx_log[0], 0, 0, PEER + 32'h300, BASE + 32'h200, bnd, 8'h1), "write-remote: dst record sent");
    chk(rd_rem_log[1] == 1, "write-remote: reader streams to the backend");
    while (meta_log.size() < 1) @(negedge clk);
    chk(meta_log[0].need_grant && meta_log[0].n_beats == 24 && meta_log[0].peer_addr == PEER + 32'h300,
        "write-remote: metadata");
    chk(wr_log.size() == 1, "write-remote: local writer stays idle");
    pulse(tx_done);
    repeat (5) @(negedge clk);
    chk(tasks_done == 1, "write-remote: not done before finish");
    pulse(finish_rx);
    repeat (2) @(negedge clk);
    chk(tasks_done == 2, "write-remote: done after finish");

    // ---- 3: read from remote ----
    launch(PEER + 32'h400, BASE + 32'h500, bnd, 8'h1, 8'h0);
    wait_n(tx_log, 2); wait_n(wr_log, 2);
    chk(rec_ok(tx_log[1], 1, 0, PEER + 32'h400, BASE + 32'h500, bnd, 8'h1), "read-remote: src record sent");
    chk(rec_ok(wr_log[1], 0, 0, BASE + 32'h500, PEER + 32'h400, bnd, 8'h0) && wr_rem_log[1],
        "read-remote: writer takes data from the backend");
    repeat (5) @(negedge clk);
    chk(msg_log.size() == 0 && rd_log.size() == 2, "read-remote: no grant, reader idle");
    pulse(wr_done);
    repeat (2) @(negedge clk);
    chk(tasks_done == 3, "read-remote: done when data is in memory");

    // ---- 4: the peer reads from us ----
    c = '0; c.is_src = 1; c.from_remote = 1; c.addr = BASE + 32'h600; c.peer_addr = PEER + 32'h700;
    c.sstride = 32'd8; c.bounds = {16'd1, 16'd1, 16'd5, 16'd7};
    @(negedge clk); cfg_rx = c; cfg_rx_valid = 1;
    #1; while (!cfg_rx_ready) begin @(negedge clk); #1; end
    @(negedge clk); cfg_rx_valid = 0;
    wait_n(rd_log, 3);
    chk(rd_log[2] == c && rd_rem_log[2], "peer-read: reader started with the received record");
    while (meta_log.size() < 2) @(negedge clk);
    chk(!meta_log[1].need_grant && meta_log[1].n_beats == 35 && meta_log[1].peer_addr == PEER + 32'h700,
        "peer-read: metadata without grant");
    pulse(tx_done);
    repeat (3) @(negedge clk);
    chk(tasks_done == 3 && msg_log.size() == 0, "peer-read: no local task counted, no message");

    // ---- 5: the peer writes to us ----
    c = '0; c.is_src = 0; c.from_remote = 1; c.addr = BASE + 32'h900; c.peer_addr = PEER + 32'ha00;
    c.bounds = {16'd1, 16'd1, 16'd1, 16'd9};
    @(negedge clk); cfg_rx = c; cfg_rx_valid = 1;
    #1; while (!cfg_rx_ready) begin @(negedge clk); #1; end
    @(negedge clk); cfg_rx_valid = 0;
    wait_n(wr_log, 3);
    chk(wr_log[2] == c && wr_rem_log[2], "peer-write: writer started with the received record");
    while (msg_log.size() < 1) @(negedge clk);
    chk(!msg_log[0].is_finish && msg_log[0].peer_addr == PEER + 32'ha00, "peer-write: grant sent");
    repeat (5) @(negedge clk);
    chk(msg_log.size() == 1, "peer-write: no finish before the data");
    pulse(wr_done);
    while (msg_log.size() < 2) @(negedge clk);
    chk(msg_log[1].is_finish && msg_log[1].peer_addr == PEER + 32'ha00, "peer-write: finish sent");
    chk(tasks_done == 3, "peer-write: no local task counted");

    // ---- 6: a record for someone else ----
    c.addr = 32'h2000_0000;
    @(negedge clk); cfg_rx = c; cfg_rx_valid = 1;
    #1; while (!cfg_rx_ready) begin @(negedge clk); #1; end
    @(negedge clk); cfg_rx_valid = 0;
    repeat (5) @(negedge clk);
    chk(dropped == 1 && wr_log.size() == 3 && rd_log.size() == 3, "foreign record dropped");

    // ---- CSR read-back ----
    @(negedge clk); csr_addr = 8'd11; #1;
    chk(csr_rdata == BASE + 32'h500, "read-back of a staging register");
    csr_addr = 8'd22; #1;
    chk(csr_rdata == 32'd3, "read-back of the launch count");
    csr_addr = 8'd23; #1;
    chk(csr_rdata == 32'd3, "read-back of the done count");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
