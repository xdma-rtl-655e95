// tcdm_xbar: word-interleaved crossbar between requesters and memory banks.
//
// Every requester (the XDMA's read channels, its write channels and the core
// port) presents a byte address inside the local memory. Consecutive 64-bit
// words live in consecutive banks: bank = addr[3 +: log2(N_BANKS)], row =
// the bits above. Each bank serves at most one requester per cycle; when
// several requesters target the same bank (a bank conflict) a per-bank
// round-robin pointer picks one and the others see gnt_o low and retry.
// A granted read returns its data on rdata_o with rvalid_o one cycle after
// the grant; a granted write is done at the granting clock edge.
// The paper names the interleaved crossbar and its bank conflicts; the
// round-robin policy and the one-cycle latency are this design's choices.
module tcdm_xbar #(
  parameter int unsigned N_REQ   = 17,
  parameter int unsigned N_BANKS = 32,
  parameter int unsigned MEM_AW  = 22,   // byte address bits of the local memory (4 MiB)
  parameter int unsigned DW      = 64,
  localparam int unsigned BW     = $clog2(N_BANKS),
  localparam int unsigned OFF    = $clog2(DW / 8),
  localparam int unsigned ROW_W  = MEM_AW - BW - OFF,
  localparam int unsigned RW     = (N_REQ > 1) ? $clog2(N_REQ) : 1
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // requester side
  input  logic [N_REQ-1:0]              req_i,
  input  logic [N_REQ-1:0]              we_i,
  input  logic [N_REQ-1:0][MEM_AW-1:0]  addr_i,
  input  logic [N_REQ-1:0][DW-1:0]      wdata_i,
  input  logic [N_REQ-1:0][DW/8-1:0]    strb_i,
  output logic [N_REQ-1:0]              gnt_o,
  output logic [N_REQ-1:0]              rvalid_o,
  output logic [N_REQ-1:0][DW-1:0]      rdata_o,
  // bank side
  output logic [N_BANKS-1:0]            bank_req_o,
  output logic [N_BANKS-1:0]            bank_we_o,
  output logic [N_BANKS-1:0][ROW_W-1:0] bank_addr_o,
  output logic [N_BANKS-1:0][DW-1:0]    bank_wdata_o,
  output logic [N_BANKS-1:0][DW/8-1:0]  bank_strb_o,
  input  logic [N_BANKS-1:0][DW-1:0]    bank_rdata_i
);
  logic [N_REQ-1:0][BW-1:0]   req_bank;
  logic [N_BANKS-1:0][RW-1:0] rr_q;         // requester with highest priority next
  logic [N_BANKS-1:0][RW-1:0] win;          // granted requester per bank
  logic [N_BANKS-1:0]         win_valid;
  logic [N_REQ-1:0][BW-1:0]   resp_bank_q;  // bank that answers each requester
  logic [N_REQ-1:0]           resp_pend_q;

  always_comb begin
    for (int r = 0; r < N_REQ; r++) req_bank[r] = addr_i[r][OFF +: BW];
  end

  // Per-bank round-robin: search from rr_q upwards (modulo N_REQ).
  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      win[b]       = '0;
      win_valid[b] = 1'b0;
      for (int k = 0; k < N_REQ; k++) begin
        int unsigned r;
        r = (int'(rr_q[b]) + k) % N_REQ;
        if (!win_valid[b] && req_i[r] && (req_bank[r] == BW'(b))) begin
          win[b]       = RW'(r);
          win_valid[b] = 1'b1;
        end
      end
    end
  end

  always_comb begin
    gnt_o = '0;
    for (int b = 0; b < N_BANKS; b++) begin
      bank_req_o[b]   = win_valid[b];
      bank_we_o[b]    = we_i[win[b]];
      bank_addr_o[b]  = addr_i[win[b]][MEM_AW-1 -: ROW_W];
      bank_wdata_o[b] = wdata_i[win[b]];
      bank_strb_o[b]  = strb_i[win[b]];
      if (win_valid[b]) gnt_o[win[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q        <= '0;
      resp_bank_q <= '0;
      resp_pend_q <= '0;
    end else begin
      for (int b = 0; b < N_BANKS; b++)
        if (win_valid[b]) rr_q[b] <= (int'(win[b]) == N_REQ - 1) ? '0 : win[b] + RW'(1);
      for (int r = 0; r < N_REQ; r++) begin
        resp_pend_q[r] <= gnt_o[r] && !we_i[r];
        if (gnt_o[r]) resp_bank_q[r] <= req_bank[r];
      end
    end
  end

  always_comb begin
    for (int r = 0; r < N_REQ; r++) begin
      rvalid_o[r] = resp_pend_q[r];
      rdata_o[r]  = bank_rdata_i[resp_bank_q[r]];
    end
  end

  // A requester is granted by at most one bank, the one it addresses.
  a_gnt_only_if_req: assert property (@(posedge clk_i) disable iff (!rst_ni) (gnt_o & ~req_i) == '0);
endmodule
