// xdma_pkg: types and constants shared by every XDMA module.
//
// A transfer ("task") is described by two XDMACfg records, one for the source
// side and one for the destination side. Each record holds the N-D affine
// access pattern of its side (base address, spatial stride across the
// parallel memory channels, and DIM temporal loop bounds and strides), the
// plugin enable bits of its plugin host, the base address of the other side
// (peer_addr) and two routing flags. Every record fits into one 512-bit AXI
// beat, so a configuration crosses the network as a single AXI write.
//
// The four MMIO windows of an XDMA slave port (cfg, grant, finish, data) are
// selected by address bits [13:12]; every window is 4 KiB so a data burst of
// at most 64 beats of 64 bytes never crosses a 4 KiB boundary.
//
// Sizes that follow the paper: 512-bit AXI data, 64-bit memory words,
// 8 channels (512/64), 4-D address generation ("4D XDMA"). Field widths
// (32-bit addresses and strides, 16-bit loop bounds) are this design's own.
package xdma_pkg;

  // ---------------------------------------------------------------------
  // Sizes
  // ---------------------------------------------------------------------
  localparam int unsigned AXI_DW   = 512;            // W_AXI
  localparam int unsigned AXI_AW   = 32;             // AXI address width
  localparam int unsigned AXI_SW   = AXI_DW / 8;     // strobe width
  localparam int unsigned MEM_DW   = 64;             // W_B
  localparam int unsigned N_CH     = AXI_DW / MEM_DW; // N_C channels per side
  localparam int unsigned DIM      = 4;              // Dim_src/dst temporal loops
  localparam int unsigned BOUND_W  = 16;
  localparam int unsigned STRIDE_W = 32;
  localparam int unsigned PCFG_W   = 8;              // plugin control bits per side
  localparam int unsigned BEATS_W  = 32;             // beat counter width

  // Element layout of one beat for the transposer plugin: an 8x8 tile of bytes.
  localparam int unsigned ELEM_W   = 8;
  localparam int unsigned TILE_N   = 8;

  // AXI burst limit: 4 KiB / 64 B per beat.
  localparam int unsigned MAX_BURST_BEATS = 4096 / AXI_SW;

  // MMIO window selector in AXI address bits [13:12].
  typedef enum logic [1:0] {
    MMIO_CFG    = 2'd0,
    MMIO_GRANT  = 2'd1,
    MMIO_FINISH = 2'd2,
    MMIO_DATA   = 2'd3
  } mmio_e;
  localparam int unsigned MMIO_LSB = 12;

  // ---------------------------------------------------------------------
  // XDMACfg: one side of a task
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic                               is_src;       // 1: source side, 0: destination side
    logic                               from_remote;  // arrived over AXI from the peer XDMA
    logic [PCFG_W-1:0]                  plugin_cfg;   // enable bit per plugin of this side
    logic [AXI_AW-1:0]                  peer_addr;    // base address of the other side
    logic [AXI_AW-1:0]                  addr;         // base address of this side
    logic [STRIDE_W-1:0]                sstride;      // spatial stride between channels (bytes)
    logic [DIM-1:0][BOUND_W-1:0]        bounds;       // temporal loop bounds, dim 0 innermost
    logic [DIM-1:0][STRIDE_W-1:0]       strides;      // temporal loop strides (bytes)
  } xdma_cfg_t;

  localparam int unsigned CFG_W = $bits(xdma_cfg_t);

  // ---------------------------------------------------------------------
  // AXI4 write channels (AW, W, B). The XDMA only ever writes.
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [AXI_AW-1:0] addr;
    logic [7:0]        len;    // beats - 1
    logic [2:0]        size;   // log2(bytes per beat)
    logic [1:0]        burst;  // 2'b01 INCR
  } axi_aw_t;

  typedef struct packed {
    logic [AXI_DW-1:0] data;
    logic [AXI_SW-1:0] strb;
    logic              last;
  } axi_w_t;

  typedef struct packed {
    logic [1:0] resp;
  } axi_b_t;

  // Metadata of a read task whose data leaves through the backend.
  typedef struct packed {
    logic [AXI_AW-1:0]  peer_addr;
    logic [BEATS_W-1:0] n_beats;
    logic               need_grant;
  } tx_meta_t;

  // Grant / finish message request towards the backend.
  typedef struct packed {
    logic              is_finish;
    logic [AXI_AW-1:0] peer_addr;
  } ctrl_msg_t;

  // Number of beats of a task: product of its temporal bounds.
  function automatic logic [BEATS_W-1:0] cfg_beats(xdma_cfg_t c);
    logic [BEATS_W-1:0] n;
    n = 1;
    for (int d = 0; d < DIM; d++) n = n * BEATS_W'(c.bounds[d]);
    return n;
  endfunction

endpackage
