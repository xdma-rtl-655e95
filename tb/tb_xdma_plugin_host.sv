// tb_xdma_plugin_host: a host with two cascaded transposer stages under all
// four settings of its control bits (bypass both, one, other, both active:
// two transposes cancel), with random input gaps and output back-pressure.
// Every beat must come out once, in order, with the reference transform,
// and with both ends always ready a beat needs exactly N_PLUGINS cycles.
// Stimulus and checks run in one clocked process, so there are no races.
module tb_xdma_plugin_host;
  localparam int NP = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [7:0]   cfg = '0;
  logic         in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [511:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  xdma_plugin_host #(.N_PLUGINS(NP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  function automatic logic [511:0] tr(logic [511:0] d);
    logic [511:0] o;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) o[(r*8+c)*8 +: 8] = d[(c*8+r)*8 +: 8];
    return o;
  endfunction
  function automatic logic [511:0] rnd512();
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  logic [511:0] q [$];
  int sent = 0, phase = 0, cyc = 0;
  int lat_start = -1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (out_valid && out_ready) begin
      logic [511:0] e;
      e = q.pop_front();
      if (cfg[0] ^ cfg[1]) e = tr(e);
      checks++;
      if (out_data !== e) begin failures++; $display("cfg %b: wrong beat", cfg[1:0]); end
      if (lat_start >= 0) begin
        checks++;
        if (cyc - lat_start != NP) begin failures++; $display("latency %0d", cyc - lat_start); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    if (in_valid && in_ready) begin q.push_back(in_data); sent++; end

    if (phase < 4) begin
      // random traffic: 100 beats per setting, then drain and switch
      if (sent < 100) begin
        if (!in_valid || in_ready) begin
          in_valid <= (sent + (in_valid && in_ready) < 100) && ($urandom_range(0, 3) != 0);
          in_data  <= rnd512();
        end
        out_ready <= ($urandom_range(0, 2) != 0);
      end else begin
        in_valid  <= 1'b0;
        out_ready <= 1'b1;
        if (q.size() == 0 && !out_valid && !(in_valid && in_ready)) begin
          phase <= phase + 1;
          sent  <= 0;
          cfg   <= 8'(phase + 1);
          if (phase == 3) begin
            // one beat into the empty host, both ends ready
            in_valid  <= 1'b1;
            in_data   <= rnd512();
            cfg       <= 8'b01;
            lat_start <= cyc + 1;
          end
        end
      end
    end else if (in_valid && in_ready) begin
      in_valid <= 1'b0;
    end
  end
endmodule
