// xdma_writer: write-side data streaming engine of the XDMA Frontend.
//
// Consumes a stream of AXI_DW-bit beats and writes each one into the local
// banked memory in an N-D affine pattern: an xdma_agu generates the base
// address of the beat and channel c writes the c-th 64-bit word of the beat
// to base + c * sstride. A beat is accepted when the address generator has
// an address and every channel buffer has a free entry; the buffer (D_BUF
// entries of address plus word per channel) lets channels that lose bank
// conflicts catch up later without holding back the input stream.
// Throughput is one beat per cycle without bank conflicts.
//
// Interface: start_i loads cfg_i; in_* is a valid/ready stream; memory ports
// follow tcdm_xbar (a granted write is done). idle_o is high when no write
// is left in any channel buffer, which together with the beat count tells
// the controller that a task has reached memory. Addresses are global; the
// low MEM_AW bits address the local memory.
module xdma_writer
  import xdma_pkg::*;
#(
  parameter int unsigned D_BUF  = 9,
  parameter int unsigned MEM_AW = 22
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          start_i,
  input  xdma_cfg_t                     cfg_i,
  input  logic                          in_valid_i,
  output logic                          in_ready_o,
  input  logic [AXI_DW-1:0]             in_data_i,
  output logic [N_CH-1:0]               mem_req_o,
  output logic [N_CH-1:0][MEM_AW-1:0]   mem_addr_o,
  output logic [N_CH-1:0][MEM_DW-1:0]   mem_wdata_o,
  input  logic [N_CH-1:0]               mem_gnt_i,
  output logic                          idle_o
);
  typedef struct packed {
    logic [MEM_AW-1:0] addr;
    logic [MEM_DW-1:0] data;
  } wr_t;

  logic                agu_valid, in_fire;
  logic [AXI_AW-1:0]   agu_addr;
  logic [STRIDE_W-1:0] sstride_q;
  logic [N_CH-1:0]     f_ready, f_valid;
  wr_t  [N_CH-1:0]     f_out;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      sstride_q <= '0;
    else if (start_i) sstride_q <= cfg_i.sstride;
  end

  xdma_agu i_agu (
    .clk_i, .rst_ni, .start_i,
    .base_i   (cfg_i.addr),
    .bounds_i (cfg_i.bounds),
    .strides_i(cfg_i.strides),
    .valid_o  (agu_valid),
    .ready_i  (in_fire),
    .addr_o   (agu_addr)
  );

  assign in_ready_o = agu_valid && (&f_ready);
  assign in_fire    = in_valid_i && in_ready_o;
  assign idle_o     = ~(|f_valid);

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [AXI_AW-1:0] ch_addr;
    wr_t               ch_in;
    assign ch_addr    = agu_addr + AXI_AW'(c) * AXI_AW'(sstride_q);
    assign ch_in.addr = ch_addr[MEM_AW-1:0];
    assign ch_in.data = in_data_i[c*MEM_DW +: MEM_DW];

    xdma_fifo #(.T(wr_t), .DEPTH(D_BUF)) i_fifo (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_valid_i(in_fire),
      .push_ready_o(f_ready[c]),
      .push_data_i (ch_in),
      .pop_valid_o (f_valid[c]),
      .pop_ready_i (mem_gnt_i[c]),
      .pop_data_o  (f_out[c]),
      .count_o     ()
    );

    assign mem_req_o[c]   = f_valid[c];
    assign mem_addr_o[c]  = f_out[c].addr;
    assign mem_wdata_o[c] = f_out[c].data;
  end
endmodule
