// xdma_plugin_transpose: plugin datapath that transposes a tile in flight.
//
// One AXI_DW-bit beat is read as a TILE_N x TILE_N matrix of ELEM_W-bit
// elements, row r occupying bits [r*TILE_N*ELEM_W +: TILE_N*ELEM_W] and
// element (r, c) bits [(r*TILE_N + c)*ELEM_W +: ELEM_W]. The output holds
// element (c, r) of the input at position (r, c). With the defaults this is
// one 8x8 tile of bytes, the MNM8N8 layout unit of the paper, which uses
// transposition in its KV-cache load workloads. The datapath is purely
// combinational and produces one output beat per input beat, so it needs no
// flow control of its own; the plugin host supplies the pipeline register
// and the bypass. A transpose is a fixed permutation of wires, so the
// module synthesizes to no cells: each output bit is an input bit from
// another position, which is the whole of its function.
module xdma_plugin_transpose
  import xdma_pkg::*;
#(
  parameter int unsigned EW = ELEM_W,
  parameter int unsigned N  = TILE_N
) (
  input  logic [N*N*EW-1:0] data_i,
  output logic [N*N*EW-1:0] data_o
);
  always_comb begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        data_o[(r*N + c)*EW +: EW] = data_i[(c*N + r)*EW +: EW];
  end
endmodule
