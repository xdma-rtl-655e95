// xdma_plugin_host: cascade of bypassable plugins on the data stream.
//
// The Frontend has two of these: one after the reader (post-reader) and one
// before the writer (pre-writer). Stage i holds a pipeline register followed
// by plugin i and a bypass: with its runtime control bit cfg_i[i] set, the
// stage's output is the plugin datapath applied to the registered beat,
// otherwise the registered beat itself. The stages form a chain, so several
// plugins can be applied in one transfer. Each pipeline register is a
// valid/ready stage that accepts a new beat whenever it is empty or its beat
// leaves in the same cycle, so the host streams one beat per cycle and adds
// N_PLUGINS cycles of latency. The structure (pipeline register, plugin
// datapath, bypass path, cascading, per-plugin control bits) follows the
// paper's plugin host; the only plugin this design provides is the tile
// transposer, so every stage holds one.
module xdma_plugin_host
  import xdma_pkg::*;
#(
  parameter int unsigned N_PLUGINS = 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [PCFG_W-1:0]    cfg_i,
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  input  logic [AXI_DW-1:0]    in_data_i,
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output logic [AXI_DW-1:0]    out_data_o
);
  logic [N_PLUGINS:0]             valid, ready;
  logic [N_PLUGINS:0][AXI_DW-1:0] data;

  assign valid[0]    = in_valid_i;
  assign data[0]     = in_data_i;
  assign in_ready_o  = ready[0];
  assign out_valid_o = valid[N_PLUGINS];
  assign out_data_o  = data[N_PLUGINS];
  assign ready[N_PLUGINS] = out_ready_i;

  for (genvar i = 0; i < N_PLUGINS; i++) begin : g_stage
    logic              vld_q;
    logic [AXI_DW-1:0] dat_q, plugged;

    assign ready[i] = !vld_q || ready[i+1];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)       vld_q <= 1'b0;
      else if (ready[i]) vld_q <= valid[i];
    end
    always_ff @(posedge clk_i) begin
      if (ready[i] && valid[i]) dat_q <= data[i];
    end

    xdma_plugin_transpose i_plugin (.data_i(dat_q), .data_o(plugged));

    assign valid[i+1] = vld_q;
    assign data[i+1]  = cfg_i[i] ? plugged : dat_q;
  end
endmodule
