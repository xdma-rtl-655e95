// xdma_reader: read-side data streaming engine of the XDMA Frontend.
//
// Produces a stream of AXI_DW-bit beats read from the local banked memory in
// an N-D affine pattern. One xdma_agu generates the base address of each beat;
// channel c (of N_CH, each one 64-bit memory word wide) reads the word at
// base + c * sstride, so the beat is assembled from N_CH words that may sit
// anywhere in memory (for example the 8 rows of an 8x8 tile).
//
// The channels run decoupled: each has an address FIFO and a data buffer of
// D_BUF entries and issues its own memory requests as long as its buffer has
// room for the answer. A channel that loses a bank conflict falls behind the
// others for a few cycles without stalling them; the beat leaves once every
// channel has its word. This buffering is what the paper's D_buf parameter
// sizes (XDMA3/5/9); D_BUF = 9 is the configuration used for its results.
// Throughput is one beat per cycle when no bank conflicts occur; the first
// beat appears three cycles after start_i.
//
// Interface: start_i loads cfg_i (addr, sstride, bounds, strides); memory
// ports follow tcdm_xbar (req/gnt, rvalid one cycle later); out_* is a
// valid/ready stream. Addresses are global; the low MEM_AW bits address the
// local memory, whose base must be aligned to its size.
module xdma_reader
  import xdma_pkg::*;
#(
  parameter int unsigned D_BUF  = 9,
  parameter int unsigned MEM_AW = 22
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          start_i,
  input  xdma_cfg_t                     cfg_i,
  // memory channels
  output logic [N_CH-1:0]               mem_req_o,
  output logic [N_CH-1:0][MEM_AW-1:0]   mem_addr_o,
  input  logic [N_CH-1:0]               mem_gnt_i,
  input  logic [N_CH-1:0]               mem_rvalid_i,
  input  logic [N_CH-1:0][MEM_DW-1:0]   mem_rdata_i,
  // output stream
  output logic                          out_valid_o,
  input  logic                          out_ready_i,
  output logic [AXI_DW-1:0]             out_data_o
);
  localparam int unsigned CW = $clog2(D_BUF + 1);
  typedef logic [MEM_AW-1:0] maddr_t;
  typedef logic [MEM_DW-1:0] mword_t;

  logic              agu_valid, agu_ready;
  logic [AXI_AW-1:0] agu_addr;
  logic [STRIDE_W-1:0] sstride_q;

  logic [N_CH-1:0]         af_push_ready, af_valid, df_valid;
  maddr_t [N_CH-1:0]       af_addr;
  mword_t [N_CH-1:0]       df_data;
  logic [N_CH-1:0][CW-1:0] df_count;
  logic [N_CH-1:0][CW-1:0] inflight_q;
  logic                    out_fire;

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
    .ready_i  (agu_ready),
    .addr_o   (agu_addr)
  );

  // The address generator feeds all channels in lock step.
  assign agu_ready = &af_push_ready;
  assign out_fire  = out_valid_o && out_ready_i;
  assign out_valid_o = &df_valid;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [AXI_AW-1:0] ch_addr;
    assign ch_addr = agu_addr + AXI_AW'(c) * AXI_AW'(sstride_q);

    xdma_fifo #(.T(maddr_t), .DEPTH(D_BUF)) i_addr_fifo (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_valid_i(agu_valid && agu_ready),
      .push_ready_o(af_push_ready[c]),
      .push_data_i (ch_addr[MEM_AW-1:0]),
      .pop_valid_o (af_valid[c]),
      .pop_ready_i (mem_gnt_i[c]),
      .pop_data_o  (af_addr[c]),
      .count_o     ()
    );

    // Issue only if the answer is sure to find room in the data buffer.
    assign mem_req_o[c]  = af_valid[c] && (32'(df_count[c]) + 32'(inflight_q[c]) < D_BUF);
    assign mem_addr_o[c] = af_addr[c];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) inflight_q[c] <= '0;
      else inflight_q[c] <= inflight_q[c] + CW'(mem_req_o[c] && mem_gnt_i[c]) - CW'(mem_rvalid_i[c]);
    end

    xdma_fifo #(.T(mword_t), .DEPTH(D_BUF)) i_data_fifo (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_valid_i(mem_rvalid_i[c]),
      .push_ready_o(),
      .push_data_i (mem_rdata_i[c]),
      .pop_valid_o (df_valid[c]),
      .pop_ready_i (out_fire),
      .pop_data_o  (df_data[c]),
      .count_o     (df_count[c])
    );

    assign out_data_o[c*MEM_DW +: MEM_DW] = df_data[c];
  end
endmodule
