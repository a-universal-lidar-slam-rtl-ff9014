// csm_pkg: types, sizes and register map shared by the blocks of the
// correlative-scan-matching (CSM) core.
//
// Sizes that follow the paper: grid maps of up to 320 x 320 cells, map values
// quantised to 6 bits (the high 6 bits of each 8-bit input value), window
// w = 8 for the coarse map, 8 coarse scores evaluated in parallel, 2w fine
// scores in parallel, up to 512 scan points, 64-bit stream packets and 32-bit
// fixed-point range/angle values.
//
// Choices of this design (the paper does not fix them): fixed point is signed
// Q16.16 (16 fraction bits) for metres and radians; grid indices and search
// offsets are 16-bit signed; scores are 16 bits wide inside the core (the
// largest score, 63 * 512 = 32256, fits) and zero-extended to 32 bits in the
// output packet; the AXI4-Lite register offsets below.
//
// Each block uses only some of these constants (the register offsets only in
// csm_ctrl_regs, FLAG_BIT only in csm_main_ctrl), so lint run on a single
// block reports the others as unused parameters; every one is used somewhere
// in csm_system.
package csm_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned MAP_MAX     = 320;  // cells per side of the map buffers
  localparam int unsigned WIN         = 8;    // w: coarse-map window / fine block side
  localparam int unsigned COARSE_PAR  = 8;    // coarse scores evaluated in parallel
  localparam int unsigned FINE_ROWS   = 2;    // fine rows (n_y) evaluated in parallel
  localparam int unsigned MAX_POINTS  = 512;  // scan buffer depth
  localparam int unsigned CELL_W      = 6;    // bits stored per map cell
  localparam int unsigned FIX_W       = 32;   // fixed-point width
  localparam int unsigned IDX_W       = 16;   // signed grid index / offset width
  localparam int unsigned SCORE_W     = 16;   // internal score width
  localparam int unsigned PTR_W       = 10;   // point counter (0..512)

  typedef logic        [CELL_W-1:0]  cell_t;
  typedef logic signed [FIX_W-1:0]   fix_t;
  typedef logic signed [IDX_W-1:0]   idx_t;
  typedef logic        [SCORE_W-1:0] score_t;

  // One scan point as held in the scan buffer.
  typedef struct packed {
    fix_t range;   // metres, Q16.16
    fix_t angle;   // radians, Q16.16
  } scan_pt_t;

  // Grid-cell indices of one discretised scan point.
  typedef struct packed {
    idx_t i;       // x index
    idx_t j;       // y index
  } cell_idx_t;

  // Algorithmic parameters of one query, written over AXI4-Lite.
  typedef struct packed {
    logic [PTR_W-1:0] num_points;  // N (1..512)
    logic [15:0]      map_w;       // map width in cells (x), 1..320
    logic [15:0]      map_h;       // map height in cells (y), 1..320
    idx_t             win_x;       // w_x in cells; 2*w_x must be a multiple of w
    idx_t             win_y;       // w_y in cells; 2*w_y must be a multiple of w
    idx_t             win_t;       // w_theta in angular steps
    fix_t             pose_x;      // xi^0_x, metres from the map's lower-left corner
    fix_t             pose_y;      // xi^0_y
    fix_t             pose_t;      // xi^0_theta, radians
    fix_t             step_t;      // delta_theta, radians
    fix_t             inv_res;     // 1/r, cells per metre
  } csm_cfg_t;

  // --------------------------------------------------- AXI4-Lite register map
  // Byte offsets. CTRL: bit0 start (write 1, self-clearing), bit1 done
  // (sticky, cleared by reading CTRL), bit2 idle.
  localparam logic [7:0] REG_CTRL       = 8'h00;
  localparam logic [7:0] REG_NUM_POINTS = 8'h10;
  localparam logic [7:0] REG_MAP_W      = 8'h14;
  localparam logic [7:0] REG_MAP_H      = 8'h18;
  localparam logic [7:0] REG_WIN_X      = 8'h1C;
  localparam logic [7:0] REG_WIN_Y      = 8'h20;
  localparam logic [7:0] REG_WIN_T      = 8'h24;
  localparam logic [7:0] REG_POSE_X     = 8'h28;
  localparam logic [7:0] REG_POSE_Y     = 8'h2C;
  localparam logic [7:0] REG_POSE_T     = 8'h30;
  localparam logic [7:0] REG_STEP_T     = 8'h34;
  localparam logic [7:0] REG_INV_RES    = 8'h38;

  // ------------------------------------------------------------ packets
  // Flag packet: bit 0 is F. F = 1: the data it announces follows;
  // F = 0: the data is skipped and the copy already in BRAM is reused.
  localparam int unsigned FLAG_BIT = 0;

  // Quantise an 8-bit map value to the stored 6 bits.
  function automatic cell_t quantise(input logic [7:0] v);
    return cell_t'(v >> (8 - CELL_W));
  endfunction

endpackage
