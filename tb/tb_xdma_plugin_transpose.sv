// tb_xdma_plugin_transpose: random 512-bit beats; every output byte (r, c)
// must equal input byte (c, r) of the 8x8 tile, computed here independently.
module tb_xdma_plugin_transpose;
  logic [511:0] din, dout;
  int checks = 0, failures = 0;
  xdma_plugin_transpose dut (.data_i(din), .data_o(dout));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 200; n++) begin
      byte unsigned m [8][8];
      for (int i = 0; i < 16; i++) din[i*32 +: 32] = $urandom;
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) m[r][c] = din[(r*8 + c)*8 +: 8];
      #1;
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
        checks++;
        if (dout[(r*8 + c)*8 +: 8] !== m[c][r]) begin
          failures++;
          if (failures < 5) $display("beat %0d (%0d,%0d): %h vs %h", n, r, c, dout[(r*8 + c)*8 +: 8], m[c][r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
