// xdma_unit: one complete XDMA (controller + frontend + backend).
//
// The controller takes tasks from the CSR port and starts the frontend's
// reader and writer; the frontend moves data between the local memory
// channels and either its own other half (local copy) or the backend; the
// backend exchanges configuration, grant, finish and data with the peer
// XDMA through an AXI master (AW/W/B) and an AXI slave (AW/W/B) port.
// Parameters follow the paper's design-time parameters: memory base and
// size (Addr_Mem, Size_Mem), source/destination buffer depth (D_buf) and the
// number of plugins per side (the extension lists). The memory width (64)
// and the AXI width (512), and thus the 8 channels, are fixed in xdma_pkg.
module xdma_unit
  import xdma_pkg::*;
#(
  parameter logic [AXI_AW-1:0] MEM_BASE   = 32'h1000_0000,
  parameter int unsigned       MEM_SIZE   = 32'h0040_0000,
  parameter int unsigned       D_BUF_SRC  = 9,
  parameter int unsigned       D_BUF_DST  = 9,
  parameter int unsigned       N_EXT_SRC  = 1,
  parameter int unsigned       N_EXT_DST  = 1,
  parameter int unsigned       TASK_DEPTH = 4,
  localparam int unsigned      MEM_AW     = $clog2(MEM_SIZE)
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // CSR port
  input  logic                        csr_valid_i,
  output logic                        csr_ready_o,
  input  logic                        csr_we_i,
  input  logic [7:0]                  csr_addr_i,
  input  logic [31:0]                 csr_wdata_i,
  output logic [31:0]                 csr_rdata_o,
  output logic [31:0]                 tasks_done_o,
  // memory channels
  output logic [N_CH-1:0]             rd_mem_req_o,
  output logic [N_CH-1:0][MEM_AW-1:0] rd_mem_addr_o,
  input  logic [N_CH-1:0]             rd_mem_gnt_i,
  input  logic [N_CH-1:0]             rd_mem_rvalid_i,
  input  logic [N_CH-1:0][MEM_DW-1:0] rd_mem_rdata_i,
  output logic [N_CH-1:0]             wr_mem_req_o,
  output logic [N_CH-1:0][MEM_AW-1:0] wr_mem_addr_o,
  output logic [N_CH-1:0][MEM_DW-1:0] wr_mem_wdata_o,
  input  logic [N_CH-1:0]             wr_mem_gnt_i,
  // AXI master
  output logic                        m_aw_valid_o,
  input  logic                        m_aw_ready_i,
  output axi_aw_t                     m_aw_o,
  output logic                        m_w_valid_o,
  input  logic                        m_w_ready_i,
  output axi_w_t                      m_w_o,
  input  logic                        m_b_valid_i,
  output logic                        m_b_ready_o,
  // AXI slave
  input  logic                        s_aw_valid_i,
  output logic                        s_aw_ready_o,
  input  axi_aw_t                     s_aw_i,
  input  logic                        s_w_valid_i,
  output logic                        s_w_ready_o,
  input  axi_w_t                      s_w_i,
  output logic                        s_b_valid_o,
  input  logic                        s_b_ready_i,
  output axi_b_t                      s_b_o,
  // event outputs (for observation)
  output logic                        grant_rx_o,
  output logic                        finish_rx_o
);
  logic      cfg_tx_valid, cfg_tx_ready, cfg_rx_valid, cfg_rx_ready;
  xdma_cfg_t cfg_tx, cfg_rx, rd_cfg, wr_cfg;
  logic      rd_start, rd_to_remote, rd_done, wr_start, wr_from_remote, wr_done;
  logic      meta_valid, meta_ready, tx_done, msg_valid, msg_ready;
  tx_meta_t  meta;
  ctrl_msg_t msg;
  logic              tx_valid, tx_ready, rx_valid, rx_ready;
  logic [AXI_DW-1:0] tx_data, rx_data;

  xdma_controller #(.MEM_BASE(MEM_BASE), .MEM_SIZE(MEM_SIZE), .TASK_DEPTH(TASK_DEPTH)) i_ctrl (
    .clk_i, .rst_ni,
    .csr_valid_i, .csr_ready_o, .csr_we_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o,
    .cfg_tx_valid_o(cfg_tx_valid), .cfg_tx_ready_i(cfg_tx_ready), .cfg_tx_o(cfg_tx),
    .cfg_rx_valid_i(cfg_rx_valid), .cfg_rx_ready_o(cfg_rx_ready), .cfg_rx_i(cfg_rx),
    .rd_start_o(rd_start), .rd_cfg_o(rd_cfg), .rd_to_remote_o(rd_to_remote), .rd_done_i(rd_done),
    .wr_start_o(wr_start), .wr_cfg_o(wr_cfg), .wr_from_remote_o(wr_from_remote), .wr_done_i(wr_done),
    .tx_meta_valid_o(meta_valid), .tx_meta_ready_i(meta_ready), .tx_meta_o(meta), .tx_done_i(tx_done),
    .msg_valid_o(msg_valid), .msg_ready_i(msg_ready), .msg_o(msg),
    .finish_rx_i(finish_rx_o),
    .tasks_done_o, .cfg_dropped_o()
  );

  xdma_frontend #(
    .D_BUF_SRC(D_BUF_SRC), .D_BUF_DST(D_BUF_DST),
    .N_EXT_SRC(N_EXT_SRC), .N_EXT_DST(N_EXT_DST), .MEM_AW(MEM_AW)
  ) i_frontend (
    .clk_i, .rst_ni,
    .rd_start_i(rd_start), .rd_cfg_i(rd_cfg), .rd_to_remote_i(rd_to_remote), .rd_done_o(rd_done),
    .wr_start_i(wr_start), .wr_cfg_i(wr_cfg), .wr_from_remote_i(wr_from_remote), .wr_done_o(wr_done),
    .rd_mem_req_o, .rd_mem_addr_o, .rd_mem_gnt_i, .rd_mem_rvalid_i, .rd_mem_rdata_i,
    .wr_mem_req_o, .wr_mem_addr_o, .wr_mem_wdata_o, .wr_mem_gnt_i,
    .tx_valid_o(tx_valid), .tx_ready_i(tx_ready), .tx_data_o(tx_data),
    .rx_valid_i(rx_valid), .rx_ready_o(rx_ready), .rx_data_i(rx_data)
  );

  xdma_backend #(.MEM_SIZE(MEM_SIZE)) i_backend (
    .clk_i, .rst_ni,
    .cfg_tx_valid_i(cfg_tx_valid), .cfg_tx_ready_o(cfg_tx_ready), .cfg_tx_i(cfg_tx),
    .cfg_rx_valid_o(cfg_rx_valid), .cfg_rx_ready_i(cfg_rx_ready), .cfg_rx_o(cfg_rx),
    .meta_valid_i(meta_valid), .meta_ready_o(meta_ready), .meta_i(meta), .tx_done_o(tx_done),
    .msg_valid_i(msg_valid), .msg_ready_o(msg_ready), .msg_i(msg),
    .finish_rx_o, .grant_rx_o,
    .tx_valid_i(tx_valid), .tx_ready_o(tx_ready), .tx_data_i(tx_data),
    .rx_valid_o(rx_valid), .rx_ready_i(rx_ready), .rx_data_o(rx_data),
    .m_aw_valid_o, .m_aw_ready_i, .m_aw_o, .m_w_valid_o, .m_w_ready_i, .m_w_o,
    .m_b_valid_i, .m_b_ready_o,
    .s_aw_valid_i, .s_aw_ready_o, .s_aw_i, .s_w_valid_i, .s_w_ready_o, .s_w_i,
    .s_b_valid_o, .s_b_ready_i, .s_b_o
  );
endmodule
