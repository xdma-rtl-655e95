// xdma_controller: turns CSR writes into XDMA tasks and dispatches them.
//
// CSR interface and converter: the core writes the two halves of a task into
// staging registers (map below) and then writes CSR_LAUNCH. The converter
// forms two XDMACfg records: the source record (addr = source base, peer_addr
// = destination base) and the destination record (the other way round).
//
// Cfg routers: the source router and the destination router each look at the
// addr of their record. If it lies in this unit's memory [MEM_BASE,
// MEM_BASE+MEM_SIZE) the record goes into that side's task FIFO; otherwise it
// is sent to the peer XDMA that owns the address (cfg_tx_*, the arbiter
// gives the source router priority). Records received from a peer
// (cfg_rx_*) are demultiplexed by their is_src flag into the same two
// routers, which give them priority over the local CSR path.
//
// In-order dispatch: the reader and the writer each take the next task of
// their FIFO when the previous one has finished, in arrival order. Which
// of the paper's two orchestration cases applies is read from the record:
//   reader, peer local             : copy inside the cluster.
//   reader, peer remote, cfg local : write to remote. Announce the transfer
//       to the backend with need_grant set (the backend holds the data until
//       the peer's grant arrives), then wait for the peer's finish message.
//   reader, cfg from remote        : the peer asked to read from us. Send
//       the data without waiting for a grant.
//   writer, cfg from remote        : the peer will write to us. Send a grant
//       once the writer is armed; when all data is in memory send finish.
//   writer, cfg local, peer remote : we read from the peer; the writer just
//       waits for the data.
// A task issued by this unit's CSRs counts as finished when its data is in
// local memory (local copy, read from remote) or when the peer's finish
// has arrived (write to remote); CSR_DONE reads that count.
//
// CSR map (32-bit registers, csr_addr_i is the register index):
//   0 src addr, 1 src spatial stride, 2..5 src bounds[0..3],
//   6..9 src strides[0..3], 10 src plugin enables,
//   11..21 the same for the destination,
//   22 launch (write) / tasks launched (read), 23 tasks finished (read).
// csr_ready_o drops while a launched task has not yet left both routers.
// The block structure follows the paper's controller; the register map, the
// flags and the dispatch conditions are this design's.
module xdma_controller
  import xdma_pkg::*;
#(
  parameter logic [AXI_AW-1:0] MEM_BASE   = 32'h1000_0000,
  parameter int unsigned       MEM_SIZE   = 32'h0040_0000,
  parameter int unsigned       TASK_DEPTH = 4
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // CSR instruction interface
  input  logic               csr_valid_i,
  output logic               csr_ready_o,
  input  logic               csr_we_i,
  input  logic [7:0]         csr_addr_i,
  input  logic [31:0]        csr_wdata_i,
  output logic [31:0]        csr_rdata_o,
  // cfg to / from the peer, through the backend
  output logic               cfg_tx_valid_o,
  input  logic               cfg_tx_ready_i,
  output xdma_cfg_t          cfg_tx_o,
  input  logic               cfg_rx_valid_i,
  output logic               cfg_rx_ready_o,
  input  xdma_cfg_t          cfg_rx_i,
  // frontend control
  output logic               rd_start_o,
  output xdma_cfg_t          rd_cfg_o,
  output logic               rd_to_remote_o,
  input  logic               rd_done_i,
  output logic               wr_start_o,
  output xdma_cfg_t          wr_cfg_o,
  output logic               wr_from_remote_o,
  input  logic               wr_done_i,
  // backend control
  output logic               tx_meta_valid_o,
  input  logic               tx_meta_ready_i,
  output tx_meta_t           tx_meta_o,
  input  logic               tx_done_i,
  output logic               msg_valid_o,
  input  logic               msg_ready_i,
  output ctrl_msg_t          msg_o,
  input  logic               finish_rx_i,
  // status
  output logic [31:0]        tasks_done_o,
  output logic [31:0]        cfg_dropped_o
);
  localparam logic [7:0] CSR_LAUNCH = 8'd22;
  localparam logic [7:0] CSR_DONE   = 8'd23;

  function automatic logic is_local(logic [AXI_AW-1:0] a);
    return (a & ~AXI_AW'(MEM_SIZE - 1)) == MEM_BASE;
  endfunction

  // ---------------- CSR staging and converter ----------------
  logic [21:0][31:0] stage_q;
  logic              src_pend_q, dst_pend_q;
  logic [31:0]       launched_q, done_q, dropped_q;
  xdma_cfg_t         csr_src, csr_dst;

  function automatic xdma_cfg_t conv(logic [21:0][31:0] r, int unsigned o, logic [31:0] peer, logic src);
    xdma_cfg_t c;
    c.is_src      = src;
    c.from_remote = 1'b0;
    c.addr        = r[o];
    c.sstride     = r[o+1];
    for (int d = 0; d < DIM; d++) begin
      c.bounds[d]  = r[o+2+d][BOUND_W-1:0];
      c.strides[d] = r[o+6+d];
    end
    c.plugin_cfg  = r[o+10][PCFG_W-1:0];
    c.peer_addr   = peer;
    return c;
  endfunction

  assign csr_src = conv(stage_q, 0, stage_q[11], 1'b1);
  assign csr_dst = conv(stage_q, 11, stage_q[0], 1'b0);

  assign csr_ready_o = !(src_pend_q || dst_pend_q);
  always_comb begin
    if (csr_addr_i == CSR_LAUNCH)     csr_rdata_o = launched_q;
    else if (csr_addr_i == CSR_DONE)  csr_rdata_o = done_q;
    else if (csr_addr_i < 8'd22)      csr_rdata_o = stage_q[csr_addr_i[4:0]];
    else                              csr_rdata_o = '0;
  end

  // ---------------- routers ----------------
  logic      rx_is_src;
  logic      s_rx_v, d_rx_v;
  xdma_cfg_t s_cand, d_cand;
  logic      s_v, d_v, s_loc, d_loc;
  logic      s_push_rdy, d_push_rdy;
  logic      s_take, d_take;         // candidate consumed this cycle
  logic      s_to_tx, d_to_tx;       // candidate wants the peer
  logic      s_use_rx, d_use_rx;

  assign rx_is_src = cfg_rx_i.is_src;
  assign s_rx_v    = cfg_rx_valid_i && rx_is_src;
  assign d_rx_v    = cfg_rx_valid_i && !rx_is_src;
  assign s_use_rx  = s_rx_v;
  assign d_use_rx  = d_rx_v;
  assign s_cand    = s_use_rx ? cfg_rx_i : csr_src;
  assign d_cand    = d_use_rx ? cfg_rx_i : csr_dst;
  assign s_v       = s_use_rx || src_pend_q;
  assign d_v       = d_use_rx || dst_pend_q;
  assign s_loc     = is_local(s_cand.addr);
  assign d_loc     = is_local(d_cand.addr);
  assign s_to_tx   = s_v && !s_loc && !s_cand.from_remote;
  assign d_to_tx   = d_v && !d_loc && !d_cand.from_remote;

  // Arbiter towards the backend: source router first.
  assign cfg_tx_valid_o = s_to_tx || d_to_tx;
  assign cfg_tx_o       = s_to_tx ? s_cand : d_cand;

  always_comb begin
    s_take = 1'b0;
    d_take = 1'b0;
    if (s_v) begin
      if (s_loc)                   s_take = s_push_rdy;
      else if (s_cand.from_remote) s_take = 1'b1;   // not ours: dropped
      else                         s_take = cfg_tx_ready_i;
    end
    if (d_v) begin
      if (d_loc)                   d_take = d_push_rdy;
      else if (d_cand.from_remote) d_take = 1'b1;
      else                         d_take = cfg_tx_ready_i && !s_to_tx;
    end
  end
  assign cfg_rx_ready_o = rx_is_src ? s_take : d_take;

  // ---------------- task FIFOs ----------------
  logic      sf_valid, sf_pop, df_valid, df_pop;
  xdma_cfg_t sf_cfg, df_cfg;

  xdma_fifo #(.T(xdma_cfg_t), .DEPTH(TASK_DEPTH)) i_src_fifo (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_valid_i(s_v && s_loc), .push_ready_o(s_push_rdy), .push_data_i(s_cand),
    .pop_valid_o(sf_valid), .pop_ready_i(sf_pop), .pop_data_o(sf_cfg), .count_o()
  );
  xdma_fifo #(.T(xdma_cfg_t), .DEPTH(TASK_DEPTH)) i_dst_fifo (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_valid_i(d_v && d_loc), .push_ready_o(d_push_rdy), .push_data_i(d_cand),
    .pop_valid_o(df_valid), .pop_ready_i(df_pop), .pop_data_o(df_cfg), .count_o()
  );

  // ---------------- reader dispatch ----------------
  typedef enum logic [1:0] {RD_IDLE, RD_META, RD_RUN, RD_FIN} rd_state_e;
  typedef enum logic [1:0] {WR_IDLE, WR_GRANT, WR_RUN, WR_FINISH} wr_state_e;
  rd_state_e rd_q;
  wr_state_e wr_q;
  xdma_cfg_t rd_cfg_q, wr_cfg_q;
  logic      rd_remote_q;
  logic [7:0] fin_credit_q;
  logic      rd_task_done, wr_task_done, fin_take;

  assign sf_pop = (rd_q == RD_IDLE) && sf_valid;
  assign df_pop = (wr_q == WR_IDLE) && df_valid;

  assign rd_start_o       = sf_pop;
  assign rd_cfg_o         = sf_cfg;
  assign rd_to_remote_o   = !is_local(sf_cfg.peer_addr);
  assign wr_start_o       = df_pop;
  assign wr_cfg_o         = df_cfg;
  assign wr_from_remote_o = !is_local(df_cfg.peer_addr);

  assign tx_meta_valid_o      = (rd_q == RD_META);
  assign tx_meta_o.peer_addr  = rd_cfg_q.peer_addr;
  assign tx_meta_o.n_beats    = cfg_beats(rd_cfg_q);
  assign tx_meta_o.need_grant = !rd_cfg_q.from_remote;

  assign msg_valid_o     = (wr_q == WR_GRANT) || (wr_q == WR_FINISH);
  assign msg_o.is_finish = (wr_q == WR_FINISH);
  assign msg_o.peer_addr = wr_cfg_q.peer_addr;

  assign fin_take     = (rd_q == RD_FIN) && (fin_credit_q != '0);
  assign rd_task_done = fin_take;
  assign wr_task_done = (wr_q == WR_RUN) && wr_done_i && !wr_cfg_q.from_remote;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q        <= RD_IDLE;
      wr_q        <= WR_IDLE;
      rd_cfg_q    <= '0;
      wr_cfg_q    <= '0;
      rd_remote_q <= 1'b0;
      fin_credit_q <= '0;
      stage_q     <= '0;
      src_pend_q  <= 1'b0;
      dst_pend_q  <= 1'b0;
      launched_q  <= '0;
      done_q      <= '0;
      dropped_q   <= '0;
    end else begin
      // CSR writes
      if (csr_valid_i && csr_ready_o && csr_we_i) begin
        if (csr_addr_i == CSR_LAUNCH) begin
          src_pend_q <= 1'b1;
          dst_pend_q <= 1'b1;
          launched_q <= launched_q + 32'd1;
        end else if (csr_addr_i < 8'd22) begin
          stage_q[csr_addr_i[4:0]] <= csr_wdata_i;
        end
      end
      if (s_take && !s_use_rx) src_pend_q <= 1'b0;
      if (d_take && !d_use_rx) dst_pend_q <= 1'b0;
      if ((s_take && s_use_rx && !s_loc) || (d_take && d_use_rx && !d_loc))
        dropped_q <= dropped_q + 32'd1;

      // reader
      case (rd_q)
        RD_IDLE: if (sf_pop) begin
          rd_cfg_q    <= sf_cfg;
          rd_remote_q <= rd_to_remote_o;
          rd_q        <= rd_to_remote_o ? RD_META : RD_RUN;
        end
        RD_META: if (tx_meta_ready_i) rd_q <= RD_RUN;
        RD_RUN: begin
          if (rd_remote_q ? tx_done_i : rd_done_i)
            rd_q <= (rd_remote_q && !rd_cfg_q.from_remote) ? RD_FIN : RD_IDLE;
        end
        RD_FIN: if (fin_take) rd_q <= RD_IDLE;
        default: rd_q <= RD_IDLE;
      endcase

      // writer
      case (wr_q)
        WR_IDLE: if (df_pop) begin
          wr_cfg_q    <= df_cfg;
          wr_q        <= df_cfg.from_remote ? WR_GRANT : WR_RUN;
        end
        WR_GRANT: if (msg_ready_i) wr_q <= WR_RUN;
        WR_RUN: if (wr_done_i) wr_q <= wr_cfg_q.from_remote ? WR_FINISH : WR_IDLE;
        WR_FINISH: if (msg_ready_i) wr_q <= WR_IDLE;
        default: wr_q <= WR_IDLE;
      endcase

      fin_credit_q <= fin_credit_q + 8'(finish_rx_i) - 8'(fin_take);
      done_q       <= done_q + 32'(rd_task_done) + 32'(wr_task_done);
    end
  end

  assign tasks_done_o  = done_q;
  assign cfg_dropped_o = dropped_q;

  // A task in the reader waiting for a finish message always came from the CSRs.
  a_fin_local: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (rd_q == RD_FIN) |-> !rd_cfg_q.from_remote);
endmodule
