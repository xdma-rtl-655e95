// xdma_soc: dual-cluster system with one XDMA per cluster (top level).
//
// Two clusters, each with its banked local memory and its XDMA, exchange
// data only through their XDMAs: cluster 0's AXI master drives cluster 1's
// AXI slave and the other way round, so every XDMA transaction of the
// paper's orchestration (cfg, grant, data, finish) travels over these two
// 512-bit links. With only two clusters this direct wiring is the whole
// network; a larger system would place an AXI crossbar between the ports
// and route by the cluster base address carried in AW.
//
// Cluster k owns global addresses [MEM_BASE[k], MEM_BASE[k] + MEM_SIZE).
// Each cluster's XDMA CSR port and a 64-bit core port into its memory are
// the top-level ports (the cores themselves are outside this design).
// Indexing: every per-cluster port is an array indexed by cluster number.
module xdma_soc
  import xdma_pkg::*;
#(
  parameter int unsigned  MEM_SIZE  = 32'h0040_0000,   // 4 MiB per cluster
  parameter logic [AXI_AW-1:0] BASE0 = 32'h1000_0000,
  parameter logic [AXI_AW-1:0] BASE1 = 32'h1040_0000,
  parameter int unsigned  N_BANKS   = 32,
  parameter int unsigned  D_BUF     = 9,
  localparam int unsigned MEM_AW    = $clog2(MEM_SIZE)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [1:0]                    core_req_i,
  input  logic [1:0]                    core_we_i,
  input  logic [1:0][MEM_AW-1:0]        core_addr_i,
  input  logic [1:0][MEM_DW-1:0]        core_wdata_i,
  input  logic [1:0][MEM_DW/8-1:0]      core_strb_i,
  output logic [1:0]                    core_gnt_o,
  output logic [1:0]                    core_rvalid_o,
  output logic [1:0][MEM_DW-1:0]        core_rdata_o,
  input  logic [1:0]                    csr_valid_i,
  output logic [1:0]                    csr_ready_o,
  input  logic [1:0]                    csr_we_i,
  input  logic [1:0][7:0]               csr_addr_i,
  input  logic [1:0][31:0]              csr_wdata_i,
  output logic [1:0][31:0]              csr_rdata_o,
  output logic [1:0][31:0]              tasks_done_o,
  // observation of the two links (cluster k's master side)
  output logic [1:0]                    link_aw_fire_o,
  output logic [1:0][1:0]               link_aw_window_o,
  output logic [1:0]                    link_w_fire_o,
  output logic [1:0]                    grant_rx_o,
  output logic [1:0]                    finish_rx_o
);
  logic [1:0]          aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_aw_t [1:0]       aw;
  axi_w_t  [1:0]       w;
  axi_b_t  [1:0]       b;
  logic [1:0]          m_b_ready;

  for (genvar k = 0; k < 2; k++) begin : g_cl
    // link k: master of cluster k -> slave of cluster 1-k
    xdma_cluster #(
      .MEM_BASE(k == 0 ? BASE0 : BASE1), .MEM_SIZE(MEM_SIZE), .N_BANKS(N_BANKS),
      .D_BUF_SRC(D_BUF), .D_BUF_DST(D_BUF)
    ) i_cluster (
      .clk_i, .rst_ni,
      .core_req_i(core_req_i[k]), .core_we_i(core_we_i[k]), .core_addr_i(core_addr_i[k]),
      .core_wdata_i(core_wdata_i[k]), .core_strb_i(core_strb_i[k]),
      .core_gnt_o(core_gnt_o[k]), .core_rvalid_o(core_rvalid_o[k]), .core_rdata_o(core_rdata_o[k]),
      .csr_valid_i(csr_valid_i[k]), .csr_ready_o(csr_ready_o[k]), .csr_we_i(csr_we_i[k]),
      .csr_addr_i(csr_addr_i[k]), .csr_wdata_i(csr_wdata_i[k]), .csr_rdata_o(csr_rdata_o[k]),
      .tasks_done_o(tasks_done_o[k]),
      .m_aw_valid_o(aw_valid[k]), .m_aw_ready_i(aw_ready[k]), .m_aw_o(aw[k]),
      .m_w_valid_o(w_valid[k]), .m_w_ready_i(w_ready[k]), .m_w_o(w[k]),
      .m_b_valid_i(b_valid[k]), .m_b_ready_o(m_b_ready[k]),
      .s_aw_valid_i(aw_valid[1-k]), .s_aw_ready_o(aw_ready[1-k]), .s_aw_i(aw[1-k]),
      .s_w_valid_i(w_valid[1-k]), .s_w_ready_o(w_ready[1-k]), .s_w_i(w[1-k]),
      .s_b_valid_o(b_valid[1-k]), .s_b_ready_i(b_ready[1-k]), .s_b_o(b[1-k]),
      .grant_rx_o(grant_rx_o[k]), .finish_rx_o(finish_rx_o[k])
    );
    assign b_ready[k]          = m_b_ready[k];
    assign link_aw_fire_o[k]   = aw_valid[k] && aw_ready[k];
    assign link_aw_window_o[k] = aw[k].addr[MMIO_LSB +: 2];
    assign link_w_fire_o[k]    = w_valid[k] && w_ready[k];
  end
endmodule
