// tb_xdma_reader: the read streaming engine against a memory model whose
// word at byte address a is {~a, a}. Pass 1 uses a 3-D pattern with random
// grant refusals per channel (bank conflicts) and random output
// back-pressure; every beat must match the reference address walk computed
// here. Pass 2 grants everything: 96 beats must leave within 96 + 4 cycles
// (one beat per cycle once the buffers are primed).
module tb_xdma_reader;
  import xdma_pkg::*;
  localparam int AW = 22;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0;
  xdma_cfg_t cfg = '0;
  logic [7:0] req, gnt, rvalid = '0;
  logic [7:0][AW-1:0] maddr;
  logic [7:0][63:0] rdata = '0;
  logic out_valid, out_ready = 0;
  logic [511:0] out_data;
  int checks = 0, failures = 0;
  bit random_gnt = 1;

  xdma_reader #(.D_BUF(9), .MEM_AW(AW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg),
    .mem_req_o(req), .mem_addr_o(maddr), .mem_gnt_i(gnt), .mem_rvalid_i(rvalid),
    .mem_rdata_i(rdata), .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  function automatic logic [63:0] word(logic [AW-1:0] a);
    return {~32'(a), 32'(a)};
  endfunction

  logic [7:0] gnt_mask = '1;
  assign gnt = req & gnt_mask;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 8; c++) begin
      rvalid[c] <= req[c] && gnt[c];
      rdata[c]  <= word(maddr[c]);
    end
    gnt_mask <= random_gnt ? 8'($urandom) : '1;
  end

  logic [511:0] expq [$];
  task automatic build(xdma_cfg_t c);
    for (int d3 = 0; d3 < c.bounds[3]; d3++)
    for (int d2 = 0; d2 < c.bounds[2]; d2++)
    for (int d1 = 0; d1 < c.bounds[1]; d1++)
    for (int d0 = 0; d0 < c.bounds[0]; d0++) begin
      logic [511:0] b;
      logic [31:0] base;
      base = c.addr + d0*c.strides[0] + d1*c.strides[1] + d2*c.strides[2] + d3*c.strides[3];
      for (int ch = 0; ch < 8; ch++) b[ch*64 +: 64] = word(AW'(base + ch*c.sstride));
      expq.push_back(b);
    end
  endtask

  int got = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && out_ready) begin
      logic [511:0] e;
      checks++; got++;
      if (expq.size() == 0) begin failures++; $display("extra beat"); end
      else begin
        e = expq.pop_front();
        if (out_data !== e) begin failures++; if (failures < 5) $display("beat %0d wrong", got); end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // pass 1: 3-D walk, 8x8-tile gather (row stride 64 -> bank conflicts in a real xbar)
    cfg.addr    <= 32'h1000_0100;
    cfg.sstride <= 64;
    cfg.bounds  <= '{16'd1, 16'd3, 16'd4, 16'd5};   // [3]..[0]
    cfg.strides <= '{32'd0, 32'd4096, 32'd512, 32'd8};
    @(posedge clk);
    build(cfg);
    start <= 1;
    @(posedge clk) start <= 0;
    while (expq.size() != 0) begin
      @(posedge clk) out_ready <= ($urandom_range(0, 2) != 0);
    end
    repeat (20) @(posedge clk);
    checks++; if (out_valid) begin failures++; $display("beats after the end"); end
    // pass 2: contiguous, no conflicts, always ready
    random_gnt = 0;
    out_ready <= 1;
    cfg.addr    <= 32'h1002_0000;
    cfg.sstride <= 8;
    cfg.bounds  <= '{16'd1, 16'd1, 16'd1, 16'd96};
    cfg.strides <= '{32'd0, 32'd0, 32'd0, 32'd64};
    @(posedge clk);
    build(cfg);
    start <= 1;
    @(posedge clk) start <= 0;
    t0 = cyc;
    while (expq.size() != 0) @(posedge clk);
    $display("96 beats in %0d cycles", cyc - t0);
    checks++; if (cyc - t0 > 100) begin failures++; $display("too slow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
