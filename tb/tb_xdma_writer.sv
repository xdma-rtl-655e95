// tb_xdma_writer: the write streaming engine scattering random beats as
// 8x8 tiles into MN rows (channel c -> row c), with random grant refusals
// and input gaps. A memory model records every write; each word must land at
// the address worked out here, exactly once, and idle_o must only rise after
// the last write. A second run with all grants checks one beat per cycle.
module tb_xdma_writer;
  import xdma_pkg::*;
  localparam int AW = 22;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0;
  xdma_cfg_t cfg = '0;
  logic in_valid = 0, in_ready, idle;
  logic [511:0] in_data = '0;
  logic [7:0] req, gnt;
  logic [7:0][AW-1:0] maddr;
  logic [7:0][63:0] wdata;
  int checks = 0, failures = 0;
  bit random_gnt = 1;

  xdma_writer #(.D_BUF(9), .MEM_AW(AW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .mem_req_o(req), .mem_addr_o(maddr), .mem_wdata_o(wdata), .mem_gnt_i(gnt), .idle_o(idle));

  logic [7:0] gnt_mask = '1;
  assign gnt = req & gnt_mask;
  logic [63:0] mem [logic [AW-1:0]];
  int n_writes = 0, cyc = 0, accepted = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int c = 0; c < 8; c++) if (req[c] && gnt[c]) begin
      checks++;
      if (mem.exists(maddr[c])) begin failures++; if (failures < 5) $display("address %h written twice", maddr[c]); end
      mem[maddr[c]] = wdata[c];
      n_writes++;
    end
    gnt_mask <= random_gnt ? 8'($urandom) : '1;
    if (in_valid && in_ready) accepted++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [511:0] beats [$];
  task automatic run(int m, int n, int base, bit gaps);
    int nb;
    nb = (m / 8) * (n / 8);
    mem.delete();
    n_writes = 0; accepted = 0;
    beats.delete();
    cfg.addr    <= 32'h1000_0000 + base;
    cfg.sstride <= n;
    cfg.bounds  <= '{16'd1, 16'd1, 16'(m / 8), 16'(n / 8)};
    cfg.strides <= '{32'd0, 32'd0, 32'(8 * n), 32'd8};
    start <= 1;
    @(posedge clk) start <= 0;
    for (int i = 0; i < nb; i++) begin
      logic [511:0] d;
      for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
      beats.push_back(d);
      in_valid <= !gaps || ($urandom_range(0, 3) != 0);
      in_data  <= d;
      @(posedge clk);
      while (!(in_valid && in_ready)) begin in_valid <= 1; @(posedge clk); end
    end
    in_valid <= 0;
  endtask

  task automatic check(int m, int n, int base);
    for (int t = 0; t < beats.size(); t++) begin
      int i, j;
      i = t / (n / 8); j = t % (n / 8);
      for (int r = 0; r < 8; r++) begin
        logic [AW-1:0] a;
        a = AW'(base + (8 * i + r) * n + 8 * j);
        checks++;
        if (!mem.exists(a) || mem[a] !== beats[t][r*64 +: 64]) begin
          failures++;
          if (failures < 5) $display("tile %0d row %0d missing or wrong at %h", t, r, a);
        end
      end
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(32, 64, 32'h400, 1);
    while (!idle) begin
      checks++;
      if (n_writes == 8 * beats.size()) begin failures++; $display("idle late"); end
      @(posedge clk);
    end
    checks++; if (n_writes != 8 * beats.size()) begin failures++; $display("idle before all writes"); end
    check(32, 64, 32'h400);
    // full rate
    random_gnt = 0;
    @(posedge clk);
    t0 = cyc;
    run(64, 96, 32'h8000, 0);
    $display("%0d beats accepted in %0d cycles", beats.size(), cyc - t0);
    checks++; if (cyc - t0 > beats.size() + 3) begin failures++; $display("too slow"); end
    repeat (3) @(posedge clk);
    checks++; if (!idle) begin failures++; $display("not idle"); end
    check(64, 96, 32'h8000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
