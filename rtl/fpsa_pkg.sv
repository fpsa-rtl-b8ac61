// fpsa_pkg: shared types and constants of the FPSA (Field Programmable
// Synapse Array) fabric.
//
// The fabric is an island-style array of tiles. Each tile holds one function
// block (a ReRAM processing element, a spiking memory block or a configurable
// logic block) under a switch box and four connection boxes. Everything is set
// up once through a random-access configuration port. This package holds the
// tile kinds, the sides of a tile, the configuration targets and the widths
// that the tiles and the top share.
//
// Paper numbers: 256x256 logical crossbar (512 physical columns), 8 cells of
// 4 bits per intersection, 128 six-input LUTs per CLB, 16 Kb SMB memory.
// Our own choices: routing channel width, pin placement, configuration map.
package fpsa_pkg;

  typedef enum logic [1:0] {TILE_PE = 2'd0, TILE_SMB = 2'd1, TILE_CLB = 2'd2} tile_t;

  // Side order used for tracks and pins: pin k of a block sits on side k % 4.
  typedef enum logic [1:0] {SIDE_N = 2'd0, SIDE_E = 2'd1, SIDE_S = 2'd2, SIDE_W = 2'd3} side_t;

  // Configuration targets inside one tile.
  typedef enum logic [2:0] {
    CFG_SB   = 3'd0,   // switch box: addr = leaving track side*W+t, data = source select
    CFG_CB_N = 3'd1,   // connection boxes: addr = pin index on that side, data = track select
    CFG_CB_E = 3'd2,
    CFG_CB_S = 3'd3,
    CFG_CB_W = 3'd4,
    CFG_BLK  = 3'd5    // the function block's own configuration
  } cfg_tgt_t;

  // Block configuration register space: addresses at or above CFG_REG_BASE
  // are registers, below it are crossbar rows (PE) or LUT indices (CLB).
  localparam logic [15:0] CFG_REG_BASE = 16'h8000;
  localparam logic [15:0] CFG_REG_ETA   = 16'h8000;  // PE firing threshold
  localparam logic [15:0] CFG_REG_NBITS = 16'h8001;  // SMB window exponent

  // Paper sizes (Section 6 and Table 1).
  localparam int unsigned XBAR_ROWS   = 256;
  localparam int unsigned XBAR_COLS   = 256;   // logical; physical is 2x
  localparam int unsigned XBAR_CELLS  = 8;
  localparam int unsigned XBAR_LVL_W  = 4;
  localparam int unsigned CLB_LUTS    = 128;
  localparam int unsigned LUT_K       = 6;
  localparam int unsigned SMB_BITS    = 16384;

  // Our own choices.
  localparam int unsigned ROUTE_W     = 96;    // tracks per direction per side
  localparam int unsigned SMB_ADDR_W  = 6;
  localparam int unsigned SMB_NB_MAX  = 8;
  localparam int unsigned V_W         = 20;    // neuron membrane / eta width

  // Control pins follow the data pins of a block.
  // PE:  pin ROWS            = window reset
  // SMB: pin LANES + 0       = clr, +1 = commit, +2 = load, +3.. = addr
  localparam int unsigned PE_CTL_PINS  = 1;
  localparam int unsigned SMB_CTL_PINS = 3 + SMB_ADDR_W;

  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  // Bit reversal of the low nb bits of t (spike generator order).
  function automatic logic [SMB_NB_MAX-1:0] bitrev(input logic [SMB_NB_MAX-1:0] t,
                                                   input logic [3:0] nb);
    logic [SMB_NB_MAX-1:0] r;
    r = '0;
    for (int i = 0; i < SMB_NB_MAX; i++)
      if (i < int'(nb)) r[int'(nb) - 1 - i] = t[i];
    return r;
  endfunction

endpackage
