// tb_xdma_frontend: the frontend with a memory model behind its read and
// write channels (random grant refusals). Run 1: a local copy of 24 beats
// with the post-reader transposer on; the destination must hold the
// transposed tiles and rd_done_o / wr_done_o must pulse once each, wr_done_o
// only after the last word is in memory. Run 2, both directions at once: the
// reader streams 20 beats to the backend port (random back-pressure,
// compared beat by beat) while the writer takes 20 beats from the backend
// port through the pre-writer transposer into memory.
module tb_xdma_frontend;
  import xdma_pkg::*;
  localparam int AW = 22;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_start = 0, wr_start = 0, rd_remote = 0, wr_remote = 0, rd_done, wr_done;
  xdma_cfg_t rd_cfg = '0, wr_cfg = '0;
  logic [7:0] rreq, rgnt, rvalid = '0, wreq, wgnt;
  logic [7:0][AW-1:0] raddr, waddr;
  logic [7:0][63:0] rdata = '0, wdata;
  logic tx_valid, tx_ready = 0, rx_valid = 0, rx_ready;
  logic [511:0] tx_data, rx_data = '0;
  int checks = 0, failures = 0;

  xdma_frontend #(.MEM_AW(AW)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .rd_start_i(rd_start), .rd_cfg_i(rd_cfg), .rd_to_remote_i(rd_remote), .rd_done_o(rd_done),
    .wr_start_i(wr_start), .wr_cfg_i(wr_cfg), .wr_from_remote_i(wr_remote), .wr_done_o(wr_done),
    .rd_mem_req_o(rreq), .rd_mem_addr_o(raddr), .rd_mem_gnt_i(rgnt), .rd_mem_rvalid_i(rvalid),
    .rd_mem_rdata_i(rdata),
    .wr_mem_req_o(wreq), .wr_mem_addr_o(waddr), .wr_mem_wdata_o(wdata), .wr_mem_gnt_i(wgnt),
    .tx_valid_o(tx_valid), .tx_ready_i(tx_ready), .tx_data_o(tx_data),
    .rx_valid_i(rx_valid), .rx_ready_o(rx_ready), .rx_data_i(rx_data));

  function automatic logic [63:0] init_word(logic [AW-1:0] a);
    return {32'(a) ^ 32'hdead_beef, 32'(a) * 32'd2654435761};
  endfunction
  function automatic logic [511:0] tr(logic [511:0] d);
    logic [511:0] o;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) o[(r*8+c)*8 +: 8] = d[(c*8+r)*8 +: 8];
    return o;
  endfunction

  logic [63:0] mem [logic [AW-1:0]];
  logic [7:0] rmask = '1, wmask = '1;
  assign rgnt = rreq & rmask;
  assign wgnt = wreq & wmask;
  int n_rd_done = 0, n_wr_done = 0, n_writes = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 8; c++) begin
      rvalid[c] <= rreq[c] && rgnt[c];
      rdata[c]  <= mem.exists(raddr[c]) ? mem[raddr[c]] : init_word(raddr[c]);
      if (wreq[c] && wgnt[c]) begin mem[waddr[c]] = wdata[c]; n_writes++; end
    end
    rmask <= 8'($urandom) | 8'($urandom);
    wmask <= 8'($urandom) | 8'($urandom);
    if (rd_done) n_rd_done++;
    if (wr_done) n_wr_done++;
  end

  function automatic xdma_cfg_t contig(logic [31:0] a, int beats, logic [7:0] p);
    xdma_cfg_t c;
    c = '0;
    c.addr = a; c.sstride = 8; c.plugin_cfg = p;
    c.bounds = '{16'd1, 16'd1, 16'd1, 16'(beats)};
    c.strides = '{32'd0, 32'd0, 32'd0, 32'd64};
    return c;
  endfunction
  function automatic logic [511:0] src_beat(logic [31:0] a, int t);
    logic [511:0] b;
    for (int c = 0; c < 8; c++) b[c*64 +: 64] = init_word(AW'(a + t * 64 + c * 8));
    return b;
  endfunction
  task automatic check_mem(logic [31:0] a, int t, logic [511:0] e, string what);
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (mem[AW'(a + t * 64 + c * 8)] !== e[c*64 +: 64]) begin
        failures++;
        if (failures < 5) $display("%s beat %0d word %0d wrong", what, t, c);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: rd_done %0d wr_done %0d writes %0d", n_rd_done, n_wr_done, n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus changes right after the falling edge and is sampled 1 ns later,
  // so a handshake seen there completes at the following rising edge.
  initial begin
    logic [511:0] rxq [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // run 1: local copy with read-side transposer
    rd_cfg = contig(32'h1000_0000, 24, 8'h1);
    wr_cfg = contig(32'h1001_0000, 24, 8'h0);
    rd_remote = 0; wr_remote = 0;
    rd_start = 1; wr_start = 1;
    @(negedge clk);
    rd_start = 0; wr_start = 0;
    #1;
    while (!wr_done) begin @(negedge clk); #1; end
    checks++; if (n_writes != 24 * 8) begin failures++; $display("wr_done before all writes (%0d)", n_writes); end
    repeat (5) @(negedge clk);
    checks++; if (n_rd_done != 1 || n_wr_done != 1) begin failures++; $display("done pulses %0d %0d", n_rd_done, n_wr_done); end
    for (int t = 0; t < 24; t++) check_mem(32'h1001_0000, t, tr(src_beat(32'h1000_0000, t)), "local");

    // run 2: to and from the backend at the same time
    rd_cfg = contig(32'h1000_4000, 20, 8'h0);
    wr_cfg = contig(32'h1002_0000, 20, 8'h1);
    rd_remote = 1; wr_remote = 1;
    rd_start = 1; wr_start = 1;
    @(negedge clk);
    rd_start = 0; wr_start = 0;
    fork
      begin : tx_side
        int t;
        t = 0;
        while (t < 20) begin
          tx_ready = ($urandom_range(0, 2) != 0);
          #1;
          if (tx_valid && tx_ready) begin
            checks++;
            if (tx_data !== src_beat(32'h1000_4000, t)) begin failures++; $display("tx beat %0d wrong", t); end
            t++;
          end
          @(negedge clk);
        end
        tx_ready = 0;
      end
      begin : rx_side
        int t;
        t = 0;
        while (t < 20) begin
          logic [511:0] d;
          for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
          rx_valid = 1; rx_data = d;
          #1;
          while (!rx_ready) begin @(negedge clk); #1; end
          rxq.push_back(d);
          t++;
          @(negedge clk);
          rx_valid = 0;
          if ($urandom_range(0, 1)) @(negedge clk);
        end
      end
    join
    while (n_wr_done < 2) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++; if (n_rd_done != 2) begin failures++; $display("rd_done count %0d", n_rd_done); end
    checks++; if (rx_ready) begin failures++; $display("rx still open after the task"); end
    for (int t = 0; t < 20; t++) check_mem(32'h1002_0000, t, tr(rxq[t]), "from backend");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
