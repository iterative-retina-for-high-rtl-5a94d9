// Shared types and constants of the Iterative Retina track finder.
//
// Number formats (all fixed point, two's complement where signed):
//   theta_t : hit or track angle in the transverse plane, 1/64 crad per LSB,
//             16 bits, so +-512 crad covers the full (-pi, pi) range plus bending.
//   r_t     : hit radius, 1/16 cm per LSB, 12 bits unsigned (up to 256 cm).
//   curv_t  : track curvature c = 0.6/Pt in crad per cm (Pt in GeV/c, 4 T),
//             2^-14 crad/cm per LSB, 16 bits signed (the sign is the charge).
//   With these units the linearised track model theta = theta0 + c*r needs a
//   single product c*r whose LSB is 2^-18 crad, shifted right by 12 bits.
//   weight  : one hit's Gaussian weight, 8 bits (255 = distance 0).
//   sum     : Sum(m,k) of up to 18 weights, 13 bits.
// The scan geometry follows the Loop-200 configuration: 10 theta0 bins by
// 20 curvature bins per iteration, two iterations, at most 18 hits and at most
// 3 tracks per sector event. The units and the fine step sizes are this
// design's choice; the paper gives the bin counts, not the number formats.
package retina_pkg;

  // Scan granularity per iteration (Loop-200): M bins in theta0, K in 1/Pt.
  localparam int unsigned N_TH0      = 10;
  localparam int unsigned N_CURV     = 20;
  localparam int unsigned N_CELLS    = N_TH0 * N_CURV;
  localparam int unsigned MAX_HITS   = 18;
  localparam int unsigned MAX_TRACKS = 3;

  localparam int unsigned THETA_W  = 16;
  localparam int unsigned R_W      = 12;
  localparam int unsigned CURV_W   = 16;
  localparam int unsigned WEIGHT_W = 8;
  localparam int unsigned SUM_W    = 13;
  localparam int unsigned HIT_IDX_W = 5;
  localparam int unsigned CELL_IDX_W = 8;
  // c*r has 2^-18 crad per LSB, theta has 2^-6: shift by 12.
  localparam int unsigned PROD_SHIFT = 12;

  // Gaussian weight table: entry j is the weight at distance j*sigma/16.
  localparam int unsigned LUT_AW    = 6;
  localparam int unsigned LUT_DEPTH = 1 << LUT_AW;

  // Fine (second-iteration) cell size; a coarse cell is N_TH0 x N_CURV fine
  // cells. 40 LSB = 0.625 crad in theta0, 25 LSB = 0.0015 crad/cm in c.
  localparam int unsigned TH0_STEP2 = 40;
  localparam int unsigned C_STEP2   = 25;
  localparam int unsigned TH0_STEP1 = TH0_STEP2 * N_TH0;   // 6.25 crad
  localparam int unsigned C_STEP1   = C_STEP2 * N_CURV;    // 0.0305 crad/cm
  // Curvature range of the sector scan: |c| <= 0.305 crad/cm, Pt >= ~2 GeV/c.
  localparam int C_MIN = -int'(C_STEP1 * N_CURV / 2);
  // Gaussian width per iteration, sigma = 2^shift / 4 crad.
  localparam int unsigned SIGMA_SHIFT1 = 4;   // 4 crad
  localparam int unsigned SIGMA_SHIFT2 = 1;   // 0.5 crad
  // A hit belongs to the winning track if its weight reaches this value.
  localparam int unsigned HIT_W_MIN = 128;

  typedef logic signed [THETA_W-1:0] theta_t;
  typedef logic        [R_W-1:0]     r_t;
  typedef logic signed [CURV_W-1:0]  curv_t;
  typedef logic        [WEIGHT_W-1:0] weight_t;
  typedef logic        [SUM_W-1:0]   sum_t;
  typedef logic        [HIT_IDX_W-1:0] hit_idx_t;
  typedef logic        [CELL_IDX_W-1:0] cell_idx_t;

  typedef struct packed {
    r_t     r;
    theta_t theta;
  } hit_t;

  // Configuration broadcast by the control unit to every cell: where the
  // scanned region starts and how wide one cell is, plus the Gaussian width.
  typedef struct packed {
    theta_t     th0_origin;
    curv_t      c_origin;
    theta_t     th0_step;
    curv_t      c_step;
    logic [3:0] sigma_shift;
  } scan_cfg_t;

  // One track found by the Iterative Retina.
  typedef struct packed {
    theta_t              theta0;   // centre of the winning fine cell
    curv_t               curv;     // 0.6/Pt of the winning fine cell
    sum_t                weight;   // its Sum(m,k)
    logic [MAX_HITS-1:0] hits;     // hits grouped with this track
  } track_t;

  // Gaussian weight exp(-x^2/2) * 255 at x = j/16, rounded. exp is evaluated
  // as (exp(-y/16))^16 with a 7-term Taylor series for the inner factor, so the
  // table is computed at elaboration without any file or system function.
  function automatic weight_t gauss_weight(int unsigned j);
    real x, y, t, e;
    x = real'(j) / 16.0;
    y = x * x / 2.0 / 16.0;
    e = 1.0;
    t = 1.0;
    for (int n = 1; n <= 7; n++) begin
      t = -t * y / real'(n);
      e = e + t;
    end
    for (int n = 0; n < 4; n++) e = e * e;
    // int'() of a real rounds to the nearest integer.
    return weight_t'(int'(e * 255.0));
  endfunction

  typedef weight_t lut_t [LUT_DEPTH];

  function automatic lut_t gauss_table();
    lut_t t;
    for (int unsigned j = 0; j < LUT_DEPTH; j++) t[j] = gauss_weight(j);
    return t;
  endfunction

endpackage
