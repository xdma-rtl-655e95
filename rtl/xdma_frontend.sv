// xdma_frontend: the memory-facing half of an XDMA unit.
//
// Read path:  reader streaming engine -> post-reader plugin host -> local
// demux, which hands each beat either to the local write path (a copy inside
// the cluster) or to the backend (tx_*) for a peer XDMA.
// Write path: local mux, which takes beats either from the local read path
// or from the backend (rx_*) -> pre-writer plugin host -> writer streaming
// engine.
//
// The controller starts each side with its XDMACfg (rd_start_i / wr_start_i)
// and says where the data goes or comes from (rd_to_remote_i /
// wr_from_remote_i, held for the task). The frontend counts beats against
// the product of the cfg's loop bounds and pulses rd_done_o when the last
// beat has left the local demux, and wr_done_o when the last beat has been
// written to memory. Beats pass only while the side's task is active. Read
// and write sides run independently, so a read for the peer and a write
// from the peer can overlap (full duplex). The arrangement of blocks
// follows the paper's frontend; the done conditions are this design's.
module xdma_frontend
  import xdma_pkg::*;
#(
  parameter int unsigned D_BUF_SRC  = 9,
  parameter int unsigned D_BUF_DST  = 9,
  parameter int unsigned N_EXT_SRC  = 1,
  parameter int unsigned N_EXT_DST  = 1,
  parameter int unsigned MEM_AW     = 22
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // control from the controller
  input  logic                        rd_start_i,
  input  xdma_cfg_t                   rd_cfg_i,
  input  logic                        rd_to_remote_i,
  output logic                        rd_done_o,
  input  logic                        wr_start_i,
  input  xdma_cfg_t                   wr_cfg_i,
  input  logic                        wr_from_remote_i,
  output logic                        wr_done_o,
  // memory: reader channels
  output logic [N_CH-1:0]             rd_mem_req_o,
  output logic [N_CH-1:0][MEM_AW-1:0] rd_mem_addr_o,
  input  logic [N_CH-1:0]             rd_mem_gnt_i,
  input  logic [N_CH-1:0]             rd_mem_rvalid_i,
  input  logic [N_CH-1:0][MEM_DW-1:0] rd_mem_rdata_i,
  // memory: writer channels
  output logic [N_CH-1:0]             wr_mem_req_o,
  output logic [N_CH-1:0][MEM_AW-1:0] wr_mem_addr_o,
  output logic [N_CH-1:0][MEM_DW-1:0] wr_mem_wdata_o,
  input  logic [N_CH-1:0]             wr_mem_gnt_i,
  // streams to / from the backend
  output logic                        tx_valid_o,
  input  logic                        tx_ready_i,
  output logic [AXI_DW-1:0]           tx_data_o,
  input  logic                        rx_valid_i,
  output logic                        rx_ready_o,
  input  logic [AXI_DW-1:0]           rx_data_i
);
  // ---------------- read side ----------------
  logic              rd_busy_q, rd_remote_q;
  logic [BEATS_W-1:0] rd_n_q, rd_cnt_q;
  logic [PCFG_W-1:0] rd_pcfg_q;
  logic              se_rd_valid, se_rd_ready, ph_rd_valid, ph_rd_ready;
  logic [AXI_DW-1:0] se_rd_data, ph_rd_data;
  logic              loc_valid, loc_ready, rd_fire;

  xdma_reader #(.D_BUF(D_BUF_SRC), .MEM_AW(MEM_AW)) i_reader (
    .clk_i, .rst_ni,
    .start_i     (rd_start_i),
    .cfg_i       (rd_cfg_i),
    .mem_req_o   (rd_mem_req_o),
    .mem_addr_o  (rd_mem_addr_o),
    .mem_gnt_i   (rd_mem_gnt_i),
    .mem_rvalid_i(rd_mem_rvalid_i),
    .mem_rdata_i (rd_mem_rdata_i),
    .out_valid_o (se_rd_valid),
    .out_ready_i (se_rd_ready),
    .out_data_o  (se_rd_data)
  );

  xdma_plugin_host #(.N_PLUGINS(N_EXT_SRC)) i_host_rd (
    .clk_i, .rst_ni,
    .cfg_i      (rd_pcfg_q),
    .in_valid_i (se_rd_valid),
    .in_ready_o (se_rd_ready),
    .in_data_i  (se_rd_data),
    .out_valid_o(ph_rd_valid),
    .out_ready_i(ph_rd_ready),
    .out_data_o (ph_rd_data)
  );

  // Local demux
  assign tx_valid_o  = ph_rd_valid && rd_busy_q && rd_remote_q;
  assign tx_data_o   = ph_rd_data;
  assign loc_valid   = ph_rd_valid && rd_busy_q && !rd_remote_q;
  assign ph_rd_ready = rd_busy_q && (rd_remote_q ? tx_ready_i : loc_ready);
  assign rd_fire     = ph_rd_valid && ph_rd_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_busy_q   <= 1'b0;
      rd_remote_q <= 1'b0;
      rd_n_q      <= '0;
      rd_cnt_q    <= '0;
      rd_pcfg_q   <= '0;
    end else if (rd_start_i) begin
      rd_busy_q   <= 1'b1;
      rd_remote_q <= rd_to_remote_i;
      rd_n_q      <= cfg_beats(rd_cfg_i);
      rd_cnt_q    <= '0;
      rd_pcfg_q   <= rd_cfg_i.plugin_cfg;
    end else if (rd_fire) begin
      rd_cnt_q <= rd_cnt_q + BEATS_W'(1);
      if (rd_cnt_q + BEATS_W'(1) == rd_n_q) rd_busy_q <= 1'b0;
    end
  end
  assign rd_done_o = rd_fire && (rd_cnt_q + BEATS_W'(1) == rd_n_q);

  // ---------------- write side ----------------
  logic              wr_busy_q, wr_remote_q;
  logic [BEATS_W-1:0] wr_n_q, wr_cnt_q;
  logic [PCFG_W-1:0] wr_pcfg_q;
  logic              mux_valid, mux_ready, ph_wr_valid, ph_wr_ready, wr_idle;
  logic [AXI_DW-1:0] mux_data, ph_wr_data;
  logic              wr_fire, wr_all_in;
  logic [BEATS_W-1:0] wr_in_cnt_q;
  logic              mux_open;

  // Local mux
  assign mux_valid  = wr_busy_q && (wr_remote_q ? rx_valid_i : loc_valid);
  assign mux_data   = wr_remote_q ? rx_data_i : ph_rd_data;
  assign rx_ready_o = wr_busy_q && wr_remote_q && mux_ready && mux_open;
  assign loc_ready  = wr_busy_q && !wr_remote_q && mux_ready && mux_open;

  // Beats admitted into the write path are counted at the mux.
  assign mux_open = (wr_in_cnt_q != wr_n_q);

  xdma_plugin_host #(.N_PLUGINS(N_EXT_DST)) i_host_wr (
    .clk_i, .rst_ni,
    .cfg_i      (wr_pcfg_q),
    .in_valid_i (mux_valid && mux_open),
    .in_ready_o (mux_ready),
    .in_data_i  (mux_data),
    .out_valid_o(ph_wr_valid),
    .out_ready_i(ph_wr_ready),
    .out_data_o (ph_wr_data)
  );

  xdma_writer #(.D_BUF(D_BUF_DST), .MEM_AW(MEM_AW)) i_writer (
    .clk_i, .rst_ni,
    .start_i    (wr_start_i),
    .cfg_i      (wr_cfg_i),
    .in_valid_i (ph_wr_valid),
    .in_ready_o (ph_wr_ready),
    .in_data_i  (ph_wr_data),
    .mem_req_o  (wr_mem_req_o),
    .mem_addr_o (wr_mem_addr_o),
    .mem_wdata_o(wr_mem_wdata_o),
    .mem_gnt_i  (wr_mem_gnt_i),
    .idle_o     (wr_idle)
  );

  assign wr_fire   = ph_wr_valid && ph_wr_ready;
  assign wr_all_in = (wr_cnt_q == wr_n_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_busy_q   <= 1'b0;
      wr_remote_q <= 1'b0;
      wr_n_q      <= '0;
      wr_cnt_q    <= '0;
      wr_in_cnt_q <= '0;
      wr_pcfg_q   <= '0;
    end else if (wr_start_i) begin
      wr_busy_q   <= 1'b1;
      wr_remote_q <= wr_from_remote_i;
      wr_n_q      <= cfg_beats(wr_cfg_i);
      wr_cnt_q    <= '0;
      wr_in_cnt_q <= '0;
      wr_pcfg_q   <= wr_cfg_i.plugin_cfg;
    end else begin
      if (mux_valid && mux_open && mux_ready) wr_in_cnt_q <= wr_in_cnt_q + BEATS_W'(1);
      if (wr_fire) wr_cnt_q <= wr_cnt_q + BEATS_W'(1);
      if (wr_busy_q && wr_all_in && wr_idle) wr_busy_q <= 1'b0;
    end
  end
  assign wr_done_o = wr_busy_q && wr_all_in && wr_idle && !wr_start_i;
endmodule
