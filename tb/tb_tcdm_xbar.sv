// tb_tcdm_xbar: 17 requesters issue random reads and writes (random byte
// strobes) into a 4 KiB window of a 32-bank memory modelled here, first
// spread over all banks, then all aimed at one bank. Checks: a grant only
// answers a request, the word reaches the bank the interleaving selects,
// read data (one cycle after the grant) equals a reference memory updated at
// each grant, and no request waits more than N_REQ cycles (round-robin).
module tb_tcdm_xbar;
  localparam int NR = 17, NB = 32, AW = 22, ROW_W = AW - 5 - 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [NR-1:0] req = '0, we = '0, gnt, rvalid;
  logic [NR-1:0][AW-1:0] addr = '0;
  logic [NR-1:0][63:0]   wdata = '0, rdata;
  logic [NR-1:0][7:0]    strb = '0;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][ROW_W-1:0] b_addr;
  logic [NB-1:0][63:0] b_wdata, b_rdata;
  logic [NB-1:0][7:0]  b_strb;

  tcdm_xbar dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
    .strb_i(strb), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_wdata_o(b_wdata),
    .bank_strb_o(b_strb), .bank_rdata_i(b_rdata));

  int checks = 0, failures = 0;
  logic [63:0] bank_mem [NB][16];
  logic [63:0] ref_mem [512];
  logic [63:0] exp_q [NR];
  logic        exp_v [NR];
  int          wait_c [NR];
  int          cyc = 0, max_wait = 0, n_reads = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) for (int r = 0; r < 16; r++) bank_mem[b][r] = '0;
    for (int i = 0; i < 512; i++) ref_mem[i] = '0;
    for (int r = 0; r < NR; r++) begin exp_v[r] = 0; wait_c[r] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    // bank model
    for (int b = 0; b < NB; b++) if (b_req[b]) begin
      if (b_addr[b] >= 16) begin failures++; $display("row out of window"); end
      else if (b_we[b]) begin
        for (int k = 0; k < 8; k++) if (b_strb[b][k]) bank_mem[b][b_addr[b][3:0]][k*8 +: 8] = b_wdata[b][k*8 +: 8];
      end else b_rdata[b] <= bank_mem[b][b_addr[b][3:0]];
    end
    // read data check
    for (int r = 0; r < NR; r++) begin
      if (rvalid[r]) begin
        checks++; n_reads++;
        if (!exp_v[r] || rdata[r] !== exp_q[r]) begin
          failures++;
          if (failures < 6) $display("req %0d read %h expected %h", r, rdata[r], exp_q[r]);
        end
        exp_v[r] = 0;
      end
    end
    // grants and reference
    for (int r = 0; r < NR; r++) begin
      if (gnt[r] && !req[r]) begin failures++; $display("grant without request"); end
      if (req[r] && gnt[r]) begin
        int w;
        w = addr[r][11:3];
        if (we[r]) begin
          for (int k = 0; k < 8; k++) if (strb[r][k]) ref_mem[w][k*8 +: 8] = wdata[r][k*8 +: 8];
        end else begin
          exp_q[r] = ref_mem[w]; exp_v[r] = 1;
        end
        if (wait_c[r] > max_wait) max_wait = wait_c[r];
        wait_c[r] = 0;
      end else if (req[r]) wait_c[r]++;
      if (wait_c[r] > NR) begin failures++; $display("req %0d starved", r); wait_c[r] = 0; end
      // new request
      if (!req[r] || gnt[r]) begin
        req[r]   <= (cyc < 3000) && ($urandom_range(0, 3) != 0);
        we[r]    <= $urandom_range(0, 1);
        wdata[r] <= {$urandom, $urandom};
        strb[r]  <= 8'($urandom);
        if (cyc < 1500) addr[r] <= AW'($urandom_range(0, 511) * 8);
        else            addr[r] <= AW'($urandom_range(0, 15) * 256);   // all in bank 0
      end
    end
    if (cyc == 3100) begin
      // every bank word against the reference
      for (int i = 0; i < 512; i++) begin
        checks++;
        if (bank_mem[i % 32][i / 32] !== ref_mem[i]) begin
          failures++;
          if (failures < 10) $display("word %0d in bank %0d differs", i, i % 32);
        end
      end
      $display("reads checked %0d, longest wait %0d cycles", n_reads, max_wait);
      checks++;
      if (max_wait < NR - 2) begin failures++; $display("hot-spot phase never queued all requesters"); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
