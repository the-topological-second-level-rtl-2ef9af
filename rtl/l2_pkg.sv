// l2_pkg -- constants, types and geometry helpers shared by the L2 trigger.
//
// Camera geometry. The camera has 2048 pixels on a triangular grid, served by
// 64 pairs of drawers; each pair holds 4 front-end (FE) boards of 8 pixels.
// Pixels carry integer coordinates in a skewed frame in which the x unit is
// sqrt(3) times the y unit, so a pixel exists only where x+y is even and its six
// nearest neighbours sit at (0,+-2) and (+-1,+-1).
//   * FE-board frame: pixel b (bit b of the FE byte) is at (x = b&1, y = b).
//   * Drawer-pair frame: FE board k is translated by (2*(k>>1), 8*(k&1)), so a
//     drawer pair spans x = 0..3, y = 0..15 and bit (8k+b) of its 32-bit word is
//     one pixel.
//   * Camera frame: drawer pair d sits in slot (col = d % SLOT_COLS,
//     row = d / SLOT_COLS) of a grid of slots, with origin
//     (4*col - 2*SLOT_COLS, 16*row - 8*SLOT_ROWS) so the camera is centred on 0.
// The FE and drawer frames, and the 26 + 32 first/second neighbours of a
// drawer pair, follow the published description. The byte order within a
// drawer and the 8 x 8 slot layout of the 64 drawer pairs are this design's
// own choices: the real camera places its drawer pairs on a rounder outline.
package l2_pkg;

  // Front-end links and event matrix
  localparam int N_LINKS        = 64;  // LVDS links, one per drawer pair
  localparam int WORDS_PER_LINK = 4;   // 16-bit words per link and event
  localparam int WORD_BITS      = 16;
  localparam int ID_BITS        = 2;
  localparam int MATRIX_ROWS    = WORDS_PER_LINK * WORD_BITS;  // 64

  // Camera
  localparam int N_DRAWERS      = 64;
  localparam int FE_PER_DRAWER  = 4;
  localparam int PIX_PER_FE     = 8;
  localparam int PIX_PER_DRAWER = FE_PER_DRAWER * PIX_PER_FE;   // 32
  localparam int SLOT_COLS      = 8;
  localparam int SLOT_ROWS      = 8;
  localparam int DRAWER_W       = 4;   // x extent of a drawer pair
  localparam int DRAWER_H       = 16;  // y extent of a drawer pair

  // Neighbourhood window of one drawer pair: the drawer pair itself plus every
  // pixel within two steps of it (x = -2..5, y = -4..19 in its local frame)
  localparam int WIN_X0 = -2;
  localparam int WIN_W  = DRAWER_W + 4;
  localparam int WIN_Y0 = -4;
  localparam int WIN_H  = DRAWER_H + 8;
  typedef logic [WIN_W*WIN_H-1:0] win_t;   // bit (y-WIN_Y0)*WIN_W + (x-WIN_X0)

  function automatic int win_bit(int x, int y);
    return (y - WIN_Y0) * WIN_W + (x - WIN_X0);
  endfunction

  // Arithmetic
  localparam int STAT_W         = 32;  // width of the final statistics
  localparam int COG_FRAC_BITS  = 5;   // centre of gravity to 1/32 unit
  localparam int COORD_W        = 16;  // target coordinates, 1/32 units
  localparam int DELTA_W        = 8;   // pixel thresholds in photoelectrons

  typedef logic [PIX_PER_DRAWER-1:0] dword_t;    // one drawer pair of a map

  // Slow-control parameters of the decision algorithm
  typedef struct packed {
    logic signed [COORD_W-1:0] xc;      // target x, 1/32 units
    logic signed [COORD_W-1:0] yc;      // target y, 1/32 units
    logic        [STAT_W-1:0]  tau2;    // squared cog threshold, 1/1024 units
    logic        [DELTA_W-1:0] delta1;  // L1 pixel threshold
    logic        [DELTA_W-1:0] delta2;  // second (higher) pixel threshold
  } l2_params_t;

  // One entry of the trigger-info FIFO
  typedef struct packed {
    logic       stereo;
    l2_params_t params;
  } trig_info_t;

  // One entry of the event data FIFO: both maps of one drawer pair
  typedef struct packed {
    dword_t map2;
    dword_t map1;
  } drawer_maps_t;

  // First and second order moments of a binary or weighted map
  typedef struct packed {
    logic signed [STAT_W-1:0] m;
    logic signed [STAT_W-1:0] mx;
    logic signed [STAT_W-1:0] my;
    logic signed [STAT_W-1:0] mxx;
    logic signed [STAT_W-1:0] myy;
    logic signed [STAT_W-1:0] mxy;
  } moments_t;

  // Outcome of the L2 algorithm for one event
  typedef enum logic [1:0] {
    DEC_STEREO     = 2'd0,  // stereoscopic event, always accepted
    DEC_NO_CLUSTER = 2'd1,  // monoscopic, no cluster of 3 pixels: reject
    DEC_COG_FAR    = 2'd2,  // monoscopic, cog too far from target: reject
    DEC_COG_NEAR   = 2'd3   // monoscopic, cog close to target: accept
  } dec_reason_t;

  // Local drawer-pair coordinates of bit i of a drawer word
  function automatic int pix_x(int i);
    return 2 * ((i / PIX_PER_FE) >> 1) + ((i % PIX_PER_FE) & 1);
  endfunction

  function automatic int pix_y(int i);
    return 8 * ((i / PIX_PER_FE) & 1) + (i % PIX_PER_FE);
  endfunction

  // Bit index of local pixel (x, y) in a drawer word, -1 if no pixel is there
  function automatic int pix_index(int x, int y);
    if (x < 0 || x >= DRAWER_W || y < 0 || y >= DRAWER_H) return -1;
    if (((x + y) & 1) != 0) return -1;
    return PIX_PER_FE * (2 * (x >> 1) + (y >> 3)) + (y & 7);
  endfunction

  // Camera-frame origin of drawer pair d
  function automatic int drawer_x0(int d);
    return DRAWER_W * (d % SLOT_COLS) - (DRAWER_W * SLOT_COLS) / 2;
  endfunction

  function automatic int drawer_y0(int d);
    return DRAWER_H * (d / SLOT_COLS) - (DRAWER_H * SLOT_ROWS) / 2;
  endfunction

endpackage
