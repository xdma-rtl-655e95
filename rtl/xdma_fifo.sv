// xdma_fifo: synchronous first-in first-out buffer with valid/ready ports.
//
// DEPTH entries of type T held in a register array with read and write
// pointers. push_ready is high while the FIFO is not full, pop_valid while it
// is not empty; a push and a pop can happen in the same cycle, also when full
// is reached. Data becomes visible at the output one cycle after it is
// pushed (no fall-through). count reports the number of stored entries.
// Used for the streaming engines' per-channel data buffers (depth D_buf) and
// for the controller's task FIFOs.
module xdma_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       flush_i,
  input  logic                       push_valid_i,
  output logic                       push_ready_o,
  input  T                           push_data_i,
  output logic                       pop_valid_o,
  input  logic                       pop_ready_i,
  output T                           pop_data_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  T                mem_q [DEPTH];
  logic [PW-1:0]   wptr_q, rptr_q;
  logic [CW-1:0]   cnt_q;
  logic            do_push, do_pop;

  assign push_ready_o = (cnt_q != CW'(DEPTH));
  assign pop_valid_o  = (cnt_q != '0);
  assign pop_data_o   = mem_q[rptr_q];
  assign count_o      = cnt_q;
  assign do_push      = push_valid_i && push_ready_o;
  assign do_pop       = pop_valid_o && pop_ready_i;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else if (flush_i) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (do_push) wptr_q <= incr(wptr_q);
      if (do_pop)  rptr_q <= incr(rptr_q);
      case ({do_push, do_pop})
        2'b10:   cnt_q <= cnt_q + CW'(1);
        2'b01:   cnt_q <= cnt_q - CW'(1);
        default: cnt_q <= cnt_q;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem_q[wptr_q] <= push_data_i;
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= CW'(DEPTH));
endmodule
