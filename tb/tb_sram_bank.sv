// tb_sram_bank: random byte-strobed writes and reads against a reference
// array; checks every read one cycle after the request (one-cycle latency)
// and that the output holds its value while no read is issued.
module tb_sram_bank;
  localparam int unsigned WORDS = 16384;
  logic clk = 0;
  always #1 clk = ~clk;
  logic req = 0, we = 0;
  logic [13:0] addr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [7:0]  strb = '0;
  int checks = 0, failures = 0;

  sram_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
                 .strb_i(strb), .rdata_o(rdata));

  logic [63:0] ref_mem [logic [13:0]];
  logic [13:0] used [64];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise 64 words fully, then mix partial writes and reads
    for (int i = 0; i < 64; i++) begin
      used[i] = 14'($urandom_range(0, WORDS - 1));
      @(negedge clk);
      req = 1; we = 1; addr = used[i]; wdata = {$urandom, $urandom}; strb = '1;
      ref_mem[used[i]] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      int k;
      k = $urandom_range(0, 63);
      @(negedge clk);
      req = 1; addr = used[k];
      if ($urandom_range(0, 1)) begin
        we = 1; wdata = {$urandom, $urandom}; strb = 8'($urandom);
        for (int b = 0; b < 8; b++) if (strb[b]) ref_mem[used[k]][b*8 +: 8] = wdata[b*8 +: 8];
      end else begin
        logic [63:0] e;
        we = 0; e = ref_mem[used[k]];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("read %h got %h exp %h", used[k], rdata, e); end
        @(negedge clk);
        checks++;
        if (rdata !== e) begin failures++; $display("output not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
