// sram_bank: one bank of the cluster's word-interleaved local memory.
//
// A single-port memory of WORDS words of DATA_W bits. A request (req_i) with
// we_i low returns the addressed word on rdata_o in the next cycle; with we_i
// high it writes the bytes selected by strb_i at the clock edge. The output
// keeps the last read word until the next read. The cluster memory of the
// paper has 32 such banks of 64-bit words, 4 MiB in total, so a bank holds
// 16384 words. One-cycle latency and single-port behaviour are this design's
// choice; in silicon the array is an SRAM macro.
module sram_bank #(
  parameter int unsigned WORDS  = 16384,
  parameter int unsigned DATA_W = 64,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic                  clk_i,
  input  logic                  req_i,
  input  logic                  we_i,
  input  logic [AW-1:0]         addr_i,
  input  logic [DATA_W-1:0]     wdata_i,
  input  logic [DATA_W/8-1:0]   strb_i,
  output logic [DATA_W-1:0]     rdata_o
);
  logic [DATA_W-1:0] mem_q [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < DATA_W / 8; b++)
          if (strb_i[b]) mem_q[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end
endmodule
