// lrm_pkg -- types and constants shared by the luminous-region monitor.
//
// The monitor counts VELO cluster centroids in 208 small detector regions
// (2 radial regions x 4 sensor positions Up/Down/Left/Right x 26 stations)
// and turns the counts into transverse positions of the luminous region by a
// fixed linear combination (first principal component) and a linear
// calibration. The counts, 208 counters and 52 half-modules follow the paper;
// every bit width, encoding and address below is this design's own choice.
//
// Counter numbering: counter k = 4*module + 2*slot + ring, where module is the
// VELO half-module 0..51 (as in the counter names M00..M51), slot 0/1 is the
// sensor suffix _0/_1 of those names and ring is 0 for the inner (I) and 1 for
// the outer (O) region. The ring is therefore bit 0 of k.
package lrm_pkg;

  // Detector geometry (paper: 26 stations, 2 half-modules each, 4 counters per
  // half-module, 208 counters in total).
  localparam int unsigned N_MODULES   = 52;
  localparam int unsigned CNT_PER_MOD = 4;
  localparam int unsigned N_COUNTERS  = N_MODULES * CNT_PER_MOD;

  // Cluster centroid coordinates in sensor-local pixel units. A sensor is
  // taken as three 256x256 pixel ASICs side by side (768 columns, 256 rows);
  // the paper gives only the 55 um pixel pitch.
  localparam int unsigned COL_W    = 10;
  localparam int unsigned ROW_W    = 8;
  localparam int unsigned SENSOR_W = 2;   // four sensors per half-module

  // Arithmetic formats.
  localparam int unsigned COUNT_W = 32;   // one counter
  localparam int unsigned W_W     = 16;   // PCA weight, signed Q1.15
  localparam int unsigned W_FRAC  = 15;
  localparam int unsigned T_W     = 32;   // normalised score, signed Q1.31
  localparam int unsigned T_FRAC  = 31;
  localparam int unsigned POS_W   = 32;   // calibrated position, signed
  localparam int unsigned CAL_W   = 32;   // alpha and beta, signed

  // One cluster centroid as delivered by the clustering stage.
  typedef struct packed {
    logic                valid;
    logic [SENSOR_W-1:0] sensor;
    logic [COL_W-1:0]    col;
    logic [ROW_W-1:0]    row;
  } cluster_t;

  // One programmable counting region: a rectangle on one sensor,
  // bounds inclusive.
  typedef struct packed {
    logic                enable;
    logic [SENSOR_W-1:0] sensor;
    logic [COL_W-1:0]    col_lo;
    logic [COL_W-1:0]    col_hi;
    logic [ROW_W-1:0]    row_lo;
    logic [ROW_W-1:0]    row_hi;
  } region_t;

  // Configuration word address map (32-bit data words).
  //   REGION_BASE + 2k     : {col_hi[25:16], col_lo[9:0]} of counter k
  //   REGION_BASE + 2k + 1 : {enable[31], sensor[17:16], row_hi[15:8], row_lo[7:0]}
  //   WEIGHT_BASE + 256e+k : {include[16], weight[15:0]} of estimator e, counter k
  //   CAL_BASE + 2e        : alpha of estimator e
  //   CAL_BASE + 2e + 1    : beta of estimator e
  //   WINDOW_ADDR          : window length in events (0 stops the counting windows)
  localparam int unsigned CFG_AW      = 16;
  localparam logic [CFG_AW-1:0] REGION_BASE = 16'h0000;
  localparam logic [CFG_AW-1:0] WEIGHT_BASE = 16'h1000;
  localparam logic [CFG_AW-1:0] CAL_BASE    = 16'h2000;
  localparam logic [CFG_AW-1:0] WINDOW_ADDR = 16'h3000;

  function automatic logic region_hit(region_t r, cluster_t c);
    return c.valid && r.enable && (c.sensor == r.sensor) &&
           (c.col >= r.col_lo) && (c.col <= r.col_hi) &&
           (c.row >= r.row_lo) && (c.row <= r.row_hi);
  endfunction

endpackage
