// xdma_cluster: the memory side of one accelerator cluster plus its XDMA.
//
// N_BANKS single-port banks of 64-bit words (the paper's cluster memory:
// 32 banks, 4 MiB) sit behind a word-interleaved crossbar. The crossbar has
// N_CH + N_CH + 1 requesters: the XDMA's read channels (0..7), its write
// channels (8..15) and one 64-bit core port (16), which stands for the
// cluster's cores and accelerator, not modelled here. The XDMA's CSR port
// and its AXI master and slave ports are the cluster's external interface.
// Memory occupies global addresses [MEM_BASE, MEM_BASE + MEM_SIZE); the core
// port uses local byte addresses.
module xdma_cluster
  import xdma_pkg::*;
#(
  parameter logic [AXI_AW-1:0] MEM_BASE  = 32'h1000_0000,
  parameter int unsigned       MEM_SIZE  = 32'h0040_0000,
  parameter int unsigned       N_BANKS   = 32,
  parameter int unsigned       D_BUF_SRC = 9,
  parameter int unsigned       D_BUF_DST = 9,
  localparam int unsigned      MEM_AW    = $clog2(MEM_SIZE)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // core port into the local memory
  input  logic                 core_req_i,
  input  logic                 core_we_i,
  input  logic [MEM_AW-1:0]    core_addr_i,
  input  logic [MEM_DW-1:0]    core_wdata_i,
  input  logic [MEM_DW/8-1:0]  core_strb_i,
  output logic                 core_gnt_o,
  output logic                 core_rvalid_o,
  output logic [MEM_DW-1:0]    core_rdata_o,
  // CSR port of the XDMA
  input  logic                 csr_valid_i,
  output logic                 csr_ready_o,
  input  logic                 csr_we_i,
  input  logic [7:0]           csr_addr_i,
  input  logic [31:0]          csr_wdata_i,
  output logic [31:0]          csr_rdata_o,
  output logic [31:0]          tasks_done_o,
  // AXI
  output logic                 m_aw_valid_o,
  input  logic                 m_aw_ready_i,
  output axi_aw_t              m_aw_o,
  output logic                 m_w_valid_o,
  input  logic                 m_w_ready_i,
  output axi_w_t               m_w_o,
  input  logic                 m_b_valid_i,
  output logic                 m_b_ready_o,
  input  logic                 s_aw_valid_i,
  output logic                 s_aw_ready_o,
  input  axi_aw_t              s_aw_i,
  input  logic                 s_w_valid_i,
  output logic                 s_w_ready_o,
  input  axi_w_t               s_w_i,
  output logic                 s_b_valid_o,
  input  logic                 s_b_ready_i,
  output axi_b_t               s_b_o,
  output logic                 grant_rx_o,
  output logic                 finish_rx_o
);
  localparam int unsigned N_REQ = 2 * N_CH + 1;
  localparam int unsigned ROW_W = MEM_AW - $clog2(N_BANKS) - $clog2(MEM_DW / 8);

  logic [N_REQ-1:0]              req, we, gnt, rvalid;
  logic [N_REQ-1:0][MEM_AW-1:0]  addr;
  logic [N_REQ-1:0][MEM_DW-1:0]  wdata, rdata;
  logic [N_REQ-1:0][MEM_DW/8-1:0] strb;
  logic [N_BANKS-1:0]             b_req, b_we;
  logic [N_BANKS-1:0][ROW_W-1:0]  b_addr;
  logic [N_BANKS-1:0][MEM_DW-1:0] b_wdata, b_rdata;
  logic [N_BANKS-1:0][MEM_DW/8-1:0] b_strb;

  logic [N_CH-1:0]             rd_req, wr_req;
  logic [N_CH-1:0][MEM_AW-1:0] rd_addr, wr_addr;
  logic [N_CH-1:0][MEM_DW-1:0] wr_wdata;

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      req[c]          = rd_req[c];
      we[c]           = 1'b0;
      addr[c]         = rd_addr[c];
      wdata[c]        = '0;
      strb[c]         = '0;
      req[N_CH+c]     = wr_req[c];
      we[N_CH+c]      = 1'b1;
      addr[N_CH+c]    = wr_addr[c];
      wdata[N_CH+c]   = wr_wdata[c];
      strb[N_CH+c]    = '1;
    end
    req[N_REQ-1]   = core_req_i;
    we[N_REQ-1]    = core_we_i;
    addr[N_REQ-1]  = core_addr_i;
    wdata[N_REQ-1] = core_wdata_i;
    strb[N_REQ-1]  = core_strb_i;
  end
  assign core_gnt_o    = gnt[N_REQ-1];
  assign core_rvalid_o = rvalid[N_REQ-1];
  assign core_rdata_o  = rdata[N_REQ-1];

  tcdm_xbar #(.N_REQ(N_REQ), .N_BANKS(N_BANKS), .MEM_AW(MEM_AW), .DW(MEM_DW)) i_xbar (
    .clk_i, .rst_ni,
    .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata), .strb_i(strb),
    .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr),
    .bank_wdata_o(b_wdata), .bank_strb_o(b_strb), .bank_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    sram_bank #(.WORDS(1 << ROW_W), .DATA_W(MEM_DW)) i_bank (
      .clk_i,
      .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .strb_i(b_strb[b]), .rdata_o(b_rdata[b])
    );
  end

  xdma_unit #(
    .MEM_BASE(MEM_BASE), .MEM_SIZE(MEM_SIZE), .D_BUF_SRC(D_BUF_SRC), .D_BUF_DST(D_BUF_DST)
  ) i_xdma (
    .clk_i, .rst_ni,
    .csr_valid_i, .csr_ready_o, .csr_we_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o, .tasks_done_o,
    .rd_mem_req_o(rd_req), .rd_mem_addr_o(rd_addr),
    .rd_mem_gnt_i(gnt[N_CH-1:0]), .rd_mem_rvalid_i(rvalid[N_CH-1:0]), .rd_mem_rdata_i(rdata[N_CH-1:0]),
    .wr_mem_req_o(wr_req), .wr_mem_addr_o(wr_addr), .wr_mem_wdata_o(wr_wdata),
    .wr_mem_gnt_i(gnt[2*N_CH-1:N_CH]),
    .m_aw_valid_o, .m_aw_ready_i, .m_aw_o, .m_w_valid_o, .m_w_ready_i, .m_w_o,
    .m_b_valid_i, .m_b_ready_o,
    .s_aw_valid_i, .s_aw_ready_o, .s_aw_i, .s_w_valid_i, .s_w_ready_o, .s_w_i,
    .s_b_valid_o, .s_b_ready_i, .s_b_o,
    .grant_rx_o, .finish_rx_o
  );
endmodule
