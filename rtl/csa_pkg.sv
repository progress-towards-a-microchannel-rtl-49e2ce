// csa_pkg -- shared sizes and types of the cross-strip anode centroiding pipeline.
//
// The cross-strip anode has 64 strips per axis. Each strip charge z arrives as an
// unsigned integer of Z_W bits from the front-end digitiser. A strip index x is
// used in its centred form xc = x - NSTRIPS/2 (range -32..31) inside the fit so
// that the power sums x^k stay small; the centre offset is added back after the
// division. Positions leave the pipeline as {strip, 5-bit sub-strip fraction},
// i.e. 1/32 of a strip per pixel, which gives 2048 pixels per axis.
//
// Strip count, the 1/32 interpolation, the 10-bit input fraction and the 5-bit
// corrected fraction follow the paper. The charge width, the accumulator and
// determinant widths and the event status codes are this design's own choices.
package csa_pkg;

  localparam int NSTRIPS   = 64;                 // strips per axis
  localparam int XW        = $clog2(NSTRIPS);    // strip index width (6)
  localparam int Z_W       = 12;                 // digitised strip charge width
  localparam int W_W       = 2 * Z_W;            // weight z^2
  localparam int L_W       = 28;                 // round(z^2 * ln z), fits for z < 4096
  localparam int ACC_W     = 56;                 // signed weighted power sums
  localparam int MIN_W     = 2 * ACC_W;          // 2x2 minors
  localparam int DET_W     = 3 * ACC_W;          // 3x3 determinants
  localparam int FRAC_W    = 10;                 // fraction into the correction table
  localparam int CFRAC_W   = 5;                  // corrected fraction (1/32 strip)
  localparam int RAWPOS_W  = XW + FRAC_W;        // 16-bit raw position
  localparam int POS_W     = XW + CFRAC_W;       // 11-bit corrected position
  localparam int CNT_W     = XW + 1;             // number of strips used, 0..64

  // Outcome of one axis fit.
  typedef enum logic [1:0] {
    ST_OK        = 2'd0,  // position valid
    ST_FEW       = 2'd1,  // fewer than three strips above threshold
    ST_NOT_PEAK  = 2'd2,  // fitted parabola opens upwards (c >= 0)
    ST_RANGE     = 2'd3   // centre outside the anode
  } fit_status_e;

  // The eight weighted sums of the linear system (Guo weighting, w = z^2):
  // s[k] = sum w*xc^k for k = 0..4, t[k] = sum w*ln(z)*xc^k for k = 0..2.
  typedef struct packed {
    logic signed [ACC_W-1:0] s0, s1, s2, s3, s4;
    logic signed [ACC_W-1:0] t0, t1, t2;
    logic        [CNT_W-1:0] n;          // strips above threshold
  } moments_t;

  // Determinants of the Cramer solution for b and c. The centre is
  // xc = -b / (2c) = -det_b / (2 * det_c); the common det(M) cancels.
  typedef struct packed {
    logic signed [DET_W-1:0] det_b;
    logic signed [DET_W-1:0] det_c;
    logic        [CNT_W-1:0] n;
  } dets_t;

  // Result of one axis.
  typedef struct packed {
    fit_status_e           status;
    logic [RAWPOS_W-1:0]   raw_pos;   // {strip, 10-bit fraction} before correction
    logic [POS_W-1:0]      pos;       // {strip, 5-bit corrected fraction}
  } axis_result_t;

endpackage
