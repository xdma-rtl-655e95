// xdma_backend: virtual tunnel between two XDMA units over AXI4 writes.
//
// Every exchange between two XDMA units is an AXI write from one unit's
// master port into the other unit's slave port. The four kinds of traffic
// use four MMIO windows of the receiving unit, chosen by AXI address bits
// [13:12] (window base = the peer's cluster base, that is the peer address
// with its low log2(MEM_SIZE) bits cleared):
//   CFG    one beat carrying an XDMACfg record in its low bits
//   GRANT  one beat: the receiver may start sending data
//   FINISH one beat: the receiver's data has been written to memory
//   DATA   bursts of at most 64 beats (4 KiB), INCR, 64-byte beats
//
// Send side (AXI master, AW and W used, B accepted and ignored): the
// arbiter picks one transaction at a time, grant/finish messages first, then
// configuration, then the next data burst, so control traffic waits for at
// most one burst. A data transfer is announced by a metadata record (peer,
// number of beats, need_grant). The data valve keeps the data stream shut
// until a grant has arrived if need_grant is set; the stream manager cuts the
// transfer into bursts (AW packer) and marks the last beat of each (W
// packer). tx_done_o pulses when the last beat of the transfer is sent.
// Each burst costs one cycle for its AW, so a long transfer runs at 64/65 of
// the link rate.
//
// Receive side (AXI slave, AW+W+B): one transaction at a time. The window of
// the address decides where the W beats go: a cfg record to the controller
// (with from_remote set), a grant into the grant credit counter of the send
// side, a finish pulse to the controller, data to the frontend's write
// path. Back-pressure of the destination is passed to WREADY. After the last
// beat an OKAY response is returned on B.
//
// The received beat is handed on unregistered: rx_data_o and cfg_rx_o are
// the W data bits themselves, and WSTRB, AWSIZE, AWBURST, BRESP and BREADY
// are constant (full 64-byte beats, INCR, OKAY, B always accepted), so
// these outputs carry no logic of their own.
//
// The MMIO mapping, the message kinds and the multi-AW split at 4 KiB follow
// the paper; window offsets, arbitration order and one-transaction-at-a-time
// are this design's choices.
module xdma_backend
  import xdma_pkg::*;
#(
  parameter int unsigned MEM_SIZE = 32'h0040_0000
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // from the controller
  input  logic               cfg_tx_valid_i,
  output logic               cfg_tx_ready_o,
  input  xdma_cfg_t          cfg_tx_i,
  output logic               cfg_rx_valid_o,
  input  logic               cfg_rx_ready_i,
  output xdma_cfg_t          cfg_rx_o,
  input  logic               meta_valid_i,
  output logic               meta_ready_o,
  input  tx_meta_t           meta_i,
  output logic               tx_done_o,
  input  logic               msg_valid_i,
  output logic               msg_ready_o,
  input  ctrl_msg_t          msg_i,
  output logic               finish_rx_o,
  output logic               grant_rx_o,
  // data streams to / from the frontend
  input  logic               tx_valid_i,
  output logic               tx_ready_o,
  input  logic [AXI_DW-1:0]  tx_data_i,
  output logic               rx_valid_o,
  input  logic               rx_ready_i,
  output logic [AXI_DW-1:0]  rx_data_o,
  // AXI master (send)
  output logic               m_aw_valid_o,
  input  logic               m_aw_ready_i,
  output axi_aw_t            m_aw_o,
  output logic               m_w_valid_o,
  input  logic               m_w_ready_i,
  output axi_w_t             m_w_o,
  input  logic               m_b_valid_i,
  output logic               m_b_ready_o,
  // AXI slave (receive)
  input  logic               s_aw_valid_i,
  output logic               s_aw_ready_o,
  input  axi_aw_t            s_aw_i,
  input  logic               s_w_valid_i,
  output logic               s_w_ready_o,
  input  axi_w_t             s_w_i,
  output logic               s_b_valid_o,
  input  logic               s_b_ready_i,
  output axi_b_t             s_b_o
);
  function automatic logic [AXI_AW-1:0] mmio(logic [AXI_AW-1:0] peer, mmio_e kind);
    logic [AXI_AW-1:0] a;
    a = peer & ~AXI_AW'(MEM_SIZE - 1);
    a[MMIO_LSB +: 2] = kind;
    return a;
  endfunction

  // ======================= send side =======================
  typedef enum logic [1:0] {T_IDLE, T_AW, T_W} tx_state_e;
  typedef enum logic [1:0] {K_MSG, K_CFG, K_DATA} tx_kind_e;

  tx_state_e          ts_q;
  tx_kind_e           kind_q;
  axi_aw_t            aw_q;
  logic [AXI_DW-1:0]  ctl_data_q;
  logic [7:0]         beat_q;
  // stream manager state
  logic               meta_act_q, granted_q;
  tx_meta_t           meta_q;
  logic [BEATS_W-1:0] sent_q;
  logic [7:0]         grant_credit_q;
  logic [BEATS_W-1:0] remaining, burst_beats;
  logic               data_ready, pick_msg, pick_cfg, pick_data, take_grant;
  logic               w_fire, w_last;

  assign remaining   = meta_q.n_beats - sent_q;
  assign burst_beats = (remaining > BEATS_W'(MAX_BURST_BEATS)) ? BEATS_W'(MAX_BURST_BEATS) : remaining;
  // Data valve: open once granted (or no grant needed)
  assign take_grant  = meta_act_q && !granted_q && (grant_credit_q != '0);
  assign data_ready  = meta_act_q && granted_q && (remaining != '0);

  assign pick_msg  = (ts_q == T_IDLE) && msg_valid_i;
  assign pick_cfg  = (ts_q == T_IDLE) && !msg_valid_i && cfg_tx_valid_i;
  assign pick_data = (ts_q == T_IDLE) && !msg_valid_i && !cfg_tx_valid_i && data_ready;

  assign msg_ready_o    = pick_msg;
  assign cfg_tx_ready_o = pick_cfg;
  assign meta_ready_o   = !meta_act_q;

  assign m_aw_valid_o = (ts_q == T_AW);
  assign m_aw_o       = aw_q;
  assign w_last       = (beat_q == aw_q.len);
  assign m_w_valid_o  = (ts_q == T_W) && ((kind_q == K_DATA) ? tx_valid_i : 1'b1);
  assign m_w_o.data   = (kind_q == K_DATA) ? tx_data_i : ctl_data_q;
  assign m_w_o.strb   = '1;
  assign m_w_o.last   = w_last;
  assign tx_ready_o   = (ts_q == T_W) && (kind_q == K_DATA) && m_w_ready_i;
  assign w_fire       = m_w_valid_o && m_w_ready_i;
  assign m_b_ready_o  = 1'b1;
  assign tx_done_o    = w_fire && w_last && (kind_q == K_DATA) &&
                        (sent_q + BEATS_W'(aw_q.len) + BEATS_W'(1) == meta_q.n_beats);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ts_q           <= T_IDLE;
      kind_q         <= K_MSG;
      aw_q           <= '0;
      ctl_data_q     <= '0;
      beat_q         <= '0;
      meta_act_q     <= 1'b0;
      granted_q      <= 1'b0;
      meta_q         <= '0;
      sent_q         <= '0;
      grant_credit_q <= '0;
    end else begin
      grant_credit_q <= grant_credit_q + 8'(grant_rx_o) - 8'(take_grant);
      if (take_grant) granted_q <= 1'b1;
      if (meta_valid_i && meta_ready_o) begin
        meta_act_q <= 1'b1;
        meta_q     <= meta_i;
        granted_q  <= !meta_i.need_grant;
        sent_q     <= '0;
      end
      case (ts_q)
        T_IDLE: begin
          aw_q.size  <= 3'($clog2(AXI_SW));
          aw_q.burst <= 2'b01;
          beat_q     <= '0;
          if (pick_msg) begin
            kind_q     <= K_MSG;
            aw_q.addr  <= mmio(msg_i.peer_addr, msg_i.is_finish ? MMIO_FINISH : MMIO_GRANT);
            aw_q.len   <= '0;
            ctl_data_q <= '0;
            ts_q       <= T_AW;
          end else if (pick_cfg) begin
            kind_q     <= K_CFG;
            aw_q.addr  <= mmio(cfg_tx_i.addr, MMIO_CFG);
            aw_q.len   <= '0;
            ctl_data_q <= AXI_DW'(cfg_tx_i);
            ts_q       <= T_AW;
          end else if (pick_data) begin
            kind_q     <= K_DATA;
            aw_q.addr  <= mmio(meta_q.peer_addr, MMIO_DATA);
            aw_q.len   <= 8'(burst_beats - BEATS_W'(1));
            ts_q       <= T_AW;
          end
        end
        T_AW: if (m_aw_ready_i) ts_q <= T_W;
        T_W: if (w_fire) begin
          beat_q <= beat_q + 8'd1;
          if (w_last) begin
            ts_q <= T_IDLE;
            if (kind_q == K_DATA) begin
              sent_q <= sent_q + BEATS_W'(aw_q.len) + BEATS_W'(1);
              if (tx_done_o) meta_act_q <= 1'b0;
            end
          end
        end
        default: ts_q <= T_IDLE;
      endcase
    end
  end

  // ======================= receive side =======================
  typedef enum logic [1:0] {R_IDLE, R_W, R_B} rx_state_e;
  rx_state_e rs_q;
  mmio_e     win_q;
  logic      s_w_fire;

  assign s_aw_ready_o = (rs_q == R_IDLE);
  assign s_b_valid_o  = (rs_q == R_B);
  assign s_b_o.resp   = 2'b00;

  always_comb begin
    cfg_rx_o             = xdma_cfg_t'(s_w_i.data[CFG_W-1:0]);
    cfg_rx_o.from_remote = 1'b1;
    rx_data_o            = s_w_i.data;
    cfg_rx_valid_o       = (rs_q == R_W) && (win_q == MMIO_CFG) && s_w_valid_i;
    rx_valid_o           = (rs_q == R_W) && (win_q == MMIO_DATA) && s_w_valid_i;
    unique case (win_q)
      MMIO_CFG:  s_w_ready_o = (rs_q == R_W) && cfg_rx_ready_i;
      MMIO_DATA: s_w_ready_o = (rs_q == R_W) && rx_ready_i;
      default:   s_w_ready_o = (rs_q == R_W);
    endcase
  end
  assign s_w_fire    = s_w_valid_i && s_w_ready_o;
  assign grant_rx_o  = s_w_fire && s_w_i.last && (win_q == MMIO_GRANT);
  assign finish_rx_o = s_w_fire && s_w_i.last && (win_q == MMIO_FINISH);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rs_q  <= R_IDLE;
      win_q <= MMIO_CFG;
    end else begin
      case (rs_q)
        R_IDLE: if (s_aw_valid_i) begin
          win_q <= mmio_e'(s_aw_i.addr[MMIO_LSB +: 2]);
          rs_q  <= R_W;
        end
        R_W: if (s_w_fire && s_w_i.last) rs_q <= R_B;
        R_B: if (s_b_ready_i) rs_q <= R_IDLE;
        default: rs_q <= R_IDLE;
      endcase
    end
  end

  // AXI handshake rules on the master side: a raised valid is held until taken.
  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    m_aw_valid_o && !m_aw_ready_i |=> m_aw_valid_o && $stable(m_aw_o));
  a_w_ctl_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    m_w_valid_o && !m_w_ready_i && (kind_q != K_DATA) |=> m_w_valid_o);
  a_burst_4k: assert property (@(posedge clk_i) disable iff (!rst_ni)
    m_aw_valid_o |-> (32'(m_aw_o.len) < MAX_BURST_BEATS));
  a_b_unused: assert property (@(posedge clk_i) disable iff (!rst_ni)
    m_b_valid_i |-> m_b_ready_o);
endmodule
