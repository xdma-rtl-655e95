// xdma_agu: N-D affine address generator of a data streaming engine.
//
// After start_i it walks DIM nested loops (dimension 0 innermost) and offers
// one address per beat:  addr = base + sum_d idx[d] * stride[d],
// idx[d] running from 0 to bounds[d]-1. Each dimension keeps its partial
// offset idx[d]*stride[d] in a register and updates it by one addition, so
// no multiplier is needed. A bound of 0 is treated as 1. valid_o stays high
// until the last address has been taken (valid_o && ready_o), then the unit
// is idle until the next start_i. The paper's Frontend replaces software
// loops by this kind of generator; the incremental form is this design's.
module xdma_agu
  import xdma_pkg::*;
(
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         start_i,
  input  logic [AXI_AW-1:0]            base_i,
  input  logic [DIM-1:0][BOUND_W-1:0]  bounds_i,
  input  logic [DIM-1:0][STRIDE_W-1:0] strides_i,
  output logic                         valid_o,
  input  logic                         ready_i,
  output logic [AXI_AW-1:0]            addr_o
);
  logic                         active_q;
  logic [AXI_AW-1:0]            base_q;
  logic [DIM-1:0][BOUND_W-1:0]  bounds_q, idx_q;
  logic [DIM-1:0][STRIDE_W-1:0] strides_q, off_q;
  logic [DIM-1:0]               last_d;

  always_comb begin
    addr_o = base_q;
    for (int d = 0; d < DIM; d++) begin
      addr_o    = addr_o + AXI_AW'(off_q[d]);
      last_d[d] = (32'(idx_q[d]) + 32'd1 >= 32'(bounds_q[d]));
    end
  end
  assign valid_o = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      base_q    <= '0;
      bounds_q  <= '0;
      strides_q <= '0;
      idx_q     <= '0;
      off_q     <= '0;
    end else if (start_i) begin
      active_q  <= 1'b1;
      base_q    <= base_i;
      bounds_q  <= bounds_i;
      strides_q <= strides_i;
      idx_q     <= '0;
      off_q     <= '0;
    end else if (active_q && ready_i) begin
      logic carry;
      carry = 1'b1;
      for (int d = 0; d < DIM; d++) begin
        if (carry) begin
          if (last_d[d]) begin
            idx_q[d] <= '0;
            off_q[d] <= '0;
          end else begin
            idx_q[d] <= idx_q[d] + BOUND_W'(1);
            off_q[d] <= off_q[d] + strides_q[d];
            carry = 1'b0;
          end
        end
      end
      if (carry) active_q <= 1'b0;
    end
  end
endmodule
