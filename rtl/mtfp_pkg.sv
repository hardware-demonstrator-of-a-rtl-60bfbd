// mtfp_pkg: types and constants shared by the muon track finder processor (MTFP).
//
// Number formats (one convention used by every block):
//  * Lengths (tube centres y_t/z_t, drift radius r, intercepts b, segment
//    positions) are two's-complement integers in units of LEN_LSB_MM =
//    7.5 mm / 256 = 0.029296875 mm. With this unit a coarse Hough bin
//    (7.5 mm) is exactly 256 counts and a fine bin (7.5/8 = 0.9375 mm) is
//    exactly 32 counts, so bin indices are plain bit slices.
//  * Slopes m are signed fixed point with SLOPE_FRAC fractional bits.
//  * cos/sin of the seed angle are signed fixed point with TRIG_FRAC bits.
// The bin counts (32 coarse, 40 fine, +-2 window, triple filling, two maxima
// per histogram, four fitters, six tube layers, six-clock hit packets) follow
// the paper; the number formats are this design's choice.
package mtfp_pkg;

  // ---------------- geometry of one chamber's RoI packet ----------------
  localparam int N_LAYERS       = 6;   // tube layers, one hit processor each
  localparam int LAYERS_PER_ML  = 3;   // two multilayers of three layers
  localparam int N_SLOTS        = 6;   // RoI of +-3 tubes: six hits per layer
  localparam int HITS_PER_ML    = LAYERS_PER_ML * N_SLOTS;  // 18
  localparam int N_HITS         = N_LAYERS * N_SLOTS;       // 36

  // ---------------- number formats ----------------
  localparam int LEN_W      = 16;  // signed length, LSB = 7.5mm/256
  localparam int R_W        = 10;  // unsigned drift radius (max 1023 LSB = 30 mm)
  localparam int SLOPE_W    = 18;  // signed slope
  localparam int SLOPE_FRAC = 12;
  localparam int SEC_W      = 20;  // unsigned sqrt(1+m^2), SLOPE_FRAC fraction bits
  localparam int TRIG_W     = 18;  // signed cos/sin
  localparam int TRIG_FRAC  = 16;
  localparam int CHI2_W     = 32;  // unsigned chi2 in LSB^2, saturating

  // ---------------- Hough histograms ----------------
  localparam int FINE_SHIFT   = 5;    // fine bin = 32 length LSB = 0.9375 mm
  localparam int COARSE_SHIFT = 8;    // coarse bin = 256 length LSB = 7.5 mm
  localparam int N_FINE       = 256;  // full-resolution histogram the two stages replace
  localparam int HA_BINS      = 32;   // Histo A
  localparam int HA_WIN       = 2;    // +-2 coarse bins around the A maximum
  localparam int HB_BINS      = 40;   // Histo B
  localparam int HIST_HALF    = (N_FINE << FINE_SHIFT) / 2;  // 4096: b_seed sits mid-range
  localparam int N_MAX        = 2;    // maxima kept per fine histogram
  localparam int MIN_HITS     = 2;    // a maximum holds at least two hits
  localparam int N_FIT        = N_MAX * N_MAX;  // four linear fitters

  typedef logic [$clog2(N_FINE)-1:0]  fine_idx_t;
  typedef logic [$clog2(HA_BINS)-1:0] coarse_idx_t;
  typedef logic [HITS_PER_ML-1:0]     ml_mask_t;     // one bit per hit of a multilayer
  typedef logic [2*HITS_PER_ML-1:0]   ml_sgn_mask_t; // {minus bits, plus bits}

  // One DT hit as delivered per tube layer and clock: tube centre and drift radius.
  typedef struct packed {
    logic                    valid;
    logic signed [LEN_W-1:0] y;   // tube centre, bending coordinate
    logic signed [LEN_W-1:0] z;   // tube centre, across the layers
    logic [R_W-1:0]          r;   // drift radius
  } dt_hit_t;

  // One clock of a packet: one hit (or none) per tube layer.
  typedef dt_hit_t [N_LAYERS-1:0] hit_row_t;

  // Pre-trigger seed: slope estimate and intercept the histograms are centred on.
  typedef struct packed {
    logic signed [SLOPE_W-1:0] m;
    logic signed [LEN_W-1:0]   b;
  } seed_t;

  // Output of a hit processor for one hit.
  typedef struct packed {
    logic                    valid;
    logic                    ok_p;     // b+ falls inside the 256-bin range
    logic                    ok_m;     // b- falls inside the 256-bin range
    fine_idx_t               bin_p;    // fine bin of b+
    fine_idx_t               bin_m;    // fine bin of b-
    logic signed [LEN_W-1:0] dy;       // r*cos(seed angle)
    logic signed [LEN_W-1:0] dz;       // r*sin(seed angle)
  } hp_out_t;

  // Result of one linear fit or of one chamber's segment finder.
  typedef struct packed {
    logic                      found;
    logic signed [SLOPE_W-1:0] m;      // fitted slope
    logic signed [LEN_W+1:0]   b;      // fitted intercept
    logic [CHI2_W-1:0]         chi2;
    logic [5:0]                n_hits;
  } segment_t;

endpackage
