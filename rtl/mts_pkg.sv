// mts_pkg: types and constants shared by the foveated Gaussian-splatting
// accelerator. A frame is rendered in 16x16-pixel tiles; a tile is named by
// its tile coordinates {ty, tx}. Quality levels L1..L4 are encoded 0..3
// (0 = highest quality, used under the gaze). Fixed-point formats:
//   mean_x/mean_y  unsigned Q12.4 pixels (pixel centre of column x is x+0.5)
//   conic a/b/c    signed Q4.20, the inverse 2D covariance of the ellipse
//   opacity        unsigned Q0.8 (255 ~ 1.0), one version per quality level
//   rgb            8 bits per channel, one version per quality level
//   depth          16-bit unsigned, smaller is nearer
// The formats and widths are this design's choice; the paper gives none.
package mts_pkg;

  localparam int TILE       = 16;  // tile edge in pixels (paper: 16x16 tiles)
  localparam int NLEVELS    = 4;   // quality levels (paper: four)
  localparam int TC_W       = 8;   // tile coordinate width
  localparam int PID_W      = 24;  // point index width
  localparam int DEPTH_W    = 16;

  typedef logic [1:0] level_t;     // quality level, 0 = L1 ... 3 = L4

  typedef struct packed {
    logic [TC_W-1:0] ty;
    logic [TC_W-1:0] tx;
  } tile_t;

  // A projected point as it leaves the projection/culling/conversion units.
  typedef struct packed {
    logic [PID_W-1:0]   pid;
    logic [15:0]        mean_x;    // Q12.4
    logic [15:0]        mean_y;    // Q12.4
    logic [DEPTH_W-1:0] depth;
    logic [TC_W-1:0]    tx0;       // tile bounding box of the ellipse
    logic [TC_W-1:0]    ty0;
    logic [TC_W-1:0]    tx1;
    logic [TC_W-1:0]    ty1;
    level_t             qbound;    // quality bound m: highest level using the point
  } proj_point_t;

  // Per-point features read by the volume rendering core.
  typedef struct packed {
    logic [15:0]               mean_x;
    logic [15:0]               mean_y;
    logic signed [23:0]        conic_a;
    logic signed [23:0]        conic_b;
    logic signed [23:0]        conic_c;
    level_t                    qbound;
    logic [NLEVELS-1:0][7:0]   opacity;  // multi-versioned
    logic [NLEVELS-1:0][23:0]  rgb;      // multi-versioned (SH_DC differs per level)
  } gauss_feat_t;

  // Tile-ellipse intersection produced by the duplication unit.
  typedef struct packed {
    tile_t              tile;
    logic [DEPTH_W-1:0] depth;
    logic [PID_W-1:0]   pid;
  } entry_t;                         // 56 bits, stored in a 64-bit memory word

  // Depth-sorted entry passed from the sorting unit to the rendering core.
  typedef struct packed {
    tile_t            tile;
    logic [PID_W-1:0] pid;
    logic             first;         // first entry of the tile
    logic             last;          // last entry of the tile
    logic             empty;         // tile has no entries (pid invalid)
  } sorted_t;

  // A merged tile: a run of consecutive tiles (raster order) sorted and
  // rendered as one pipeline unit.
  typedef struct packed {
    tile_t       first_tile;
    logic [15:0] ntiles;
    logic [23:0] start;              // offset of its first entry in the binned list
    logic [23:0] total;              // entries in the merged tile
  } merged_t;

  // Foveation configuration, written by the host for each gaze position.
  // Eccentricity is approximated by the squared distance in tiles between a
  // tile and the gaze tile. rb2[k] is the squared radius where level k+1
  // starts; tiles with blo2[k] <= d2 < rb2[k] are blended between levels k
  // and k+1 with weight ((d2 - blo2[k]) * binv[k]) >> 16, binv[k] being
  // 2^24 / (rb2[k] - blo2[k]).
  typedef struct packed {
    logic [TC_W-1:0]        gaze_tx;
    logic [TC_W-1:0]        gaze_ty;
    logic [2:0][16:0]       rb2;
    logic [2:0][16:0]       blo2;
    logic [2:0][23:0]       binv;
  } fov_cfg_t;

endpackage
