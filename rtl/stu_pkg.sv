// stu_pkg: constants and types shared by the Summary Trigger Unit (STU) RTL.
//
// Geometry follows the paper: one TRU region is 4 rows (phi) x 24 columns
// (eta) of fastOR signals, numbered column-major (fastOR = 4*col + row), so a
// region sends 96 values of 12 bits. 32 TRU regions cover the calorimeter
// (16 in phi on each of the two sides, C and A). A subregion is 4x4 fastOR,
// giving 6 per region and a 12 x 16 subregion map. The link carries each word
// on two data pairs; the 6+6 bit split, the training pattern and the start
// marker are this design's own choices (the paper gives no encoding).
package stu_pkg;

  // ---- fastOR geometry (paper) ----
  localparam int unsigned FASTOR_W  = 12;  // bits per time-integrated fastOR value
  localparam int unsigned N_ROWS    = 4;   // fastOR rows (phi) per region
  localparam int unsigned N_COLS    = 24;  // fastOR columns (eta) per region
  localparam int unsigned N_FASTOR  = N_ROWS * N_COLS;      // 96 values per TRU
  localparam int unsigned N_READS   = N_FASTOR + N_ROWS;    // 100 reads: 96 + 1 column
  localparam int unsigned N_TRU     = 32;  // TRU links / regions
  localparam int unsigned N_PHI_REG = 16;  // regions along phi on one side

  // ---- photon (2x2 fastOR) patches ----
  localparam int unsigned N_PH_PATCH = N_COLS / 2;           // 12 patches per processor
  localparam int unsigned PH_SUM_W   = FASTOR_W + 2;         // sum of 4 values

  // ---- subregions and jet (2x2 subregion) patches ----
  localparam int unsigned SR_PER_REG = N_COLS / 4;           // 6 subregions per region
  localparam int unsigned SR_W       = 16;                   // 16 x 12 bit fits in 16 bits
  localparam int unsigned JET_ROWS   = 12;                   // eta rows of subregions
  localparam int unsigned JET_COLS   = 16;                   // phi columns of subregions
  localparam int unsigned JET_PROCS  = JET_ROWS - 1;         // 11 processors per column
  localparam int unsigned JET_PATCH  = JET_COLS / 2;         // 8 patches per processor (even)
  localparam int unsigned JET_SUM_W  = SR_W + 2;

  // ---- thresholds ----
  localparam int unsigned THR_W     = 18;  // wide enough for the jet patch sums
  localparam int unsigned V0_W      = 16;  // charge of one V0 plate (assumed width)
  localparam int unsigned COEF_W    = 32;  // signed fit coefficients (assumed width)

  // ---- serial link ----
  localparam int unsigned CHUNK_W   = 6;   // bits per pair per 12-bit word
  localparam int unsigned TAP_W     = 6;   // 64 delay taps of 78 ps
  localparam logic [CHUNK_W-1:0]  TRAIN_CHUNK = 6'b000111;  // rotations all distinct
  localparam logic [FASTOR_W-1:0] IDLE_WORD   = {TRAIN_CHUNK, TRAIN_CHUNK};
  localparam logic [FASTOR_W-1:0] START_WORD  = 12'hFC0;    // frame start marker

  // Data source of one photon patch processor in one read cycle.
  typedef enum logic [1:0] {
    SRC_OWN = 2'd0,  // this region's RAM
    SRC_R   = 2'd1,  // next region in phi ("R")
    SRC_A   = 2'd2,  // neighbouring region in eta, other side ("A")
    SRC_AR  = 2'd3   // diagonal neighbour ("A+1,R")
  } src_e;

  // Result of one patch comparison.
  typedef struct packed {
    logic                 valid;
    logic                 hit;
    logic [3:0]           idx;
    logic [JET_SUM_W-1:0] sum;
  } patch_res_t;

endpackage
