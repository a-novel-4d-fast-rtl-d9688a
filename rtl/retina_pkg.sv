// retina_pkg: constants, data types and elaboration-time table functions shared by the
// 4D artificial retina track finder.
//
// Geometry follows the telescope the design is built for: 8 single-sided strip planes,
// the first at z = 100 mm from the beam line, 40 mm apart, 180 um strip pitch. The grid
// of cellular units is 512 engines with 3.3 mm granularity, arranged here as 32 values of
// x+ by 16 values of x- (the split into 32 x 16 is this design's choice; the hardware is
// organised as 16 groups of 32 engines). The time hypotheses are t0-dT, t0, t0+dT with
// dT = 400 ps.
//
// Number formats (this design's choice): positions x are signed 16-bit in units of 10 um
// (+-327 mm); times are signed 16-bit in ps relative to the nominal crossing time t0;
// Gaussian responses are unsigned 8-bit (255 = 1.0); engine weights are unsigned 24-bit
// saturating sums of 16-bit products.
//
// All look-up table contents (receptor positions, expected hit times, exponential and
// logarithm tables, switch routing masks) are computed from the geometry at elaboration
// with the real-valued functions below; they are constant ROMs in hardware.
package retina_pkg;

  // ---------------- geometry ----------------
  localparam int  N_LAYERS    = 8;
  localparam int  LAYER_W     = 3;
  localparam int  N_XP        = 32;            // grid rows (x+), engines per group
  localparam int  N_XM        = 16;            // grid columns (x-), engine groups
  localparam int  N_ENGINES   = N_XP * N_XM;   // 512
  localparam int  ROW_W       = 5;
  localparam int  COL_W       = 4;
  localparam real Z_FIRST_MM  = 100.0;         // D = 10 cm
  localparam real DZ_MM       = 40.0;          // d = 4 cm
  localparam real Z_LAST_MM   = Z_FIRST_MM + DZ_MM * (N_LAYERS - 1);
  localparam real Z_PLUS_MM   = (Z_FIRST_MM + Z_LAST_MM) / 2.0;
  localparam real Z_MINUS_MM  = (Z_FIRST_MM - Z_LAST_MM) / 2.0;
  localparam real C_MM_PER_PS = 0.299792458;

  // ---------------- number formats ----------------
  localparam int  X_W         = 16;            // 10 um units
  localparam int  T_W         = 16;            // ps
  localparam real X_UNIT_MM   = 0.01;
  localparam int  STRIP_W     = 10;            // 1024 strips per plane
  localparam int  N_STRIPS    = 1 << STRIP_W;
  localparam int  PITCH_U     = 18;            // 180 um in x units
  localparam int  E_W         = 8;             // Gaussian response
  localparam int  P_W         = 2 * E_W;       // space x time product
  localparam int  ACC_W       = 24;            // engine weight

  // ---------------- algorithm parameters ----------------
  localparam int  DX_U        = 330;           // grid granularity 3.3 mm
  localparam int  DT_PS       = 400;           // time hypothesis spacing
  localparam int  SIGMA_X_U   = 220;           // sigma of space response, 2.2 mm (assumed)
  localparam int  SIGMA_T_PS  = 300;           // sigma_t of time response (assumed)
  localparam int  N_HYP       = 3;             // t0-dT, t0, t0+dT

  // exponential LUT: two halves of 2^EXP_AW entries, address = |d| >> shift
  localparam int  EXP_AW      = 7;
  localparam int  EXP_SHIFT_X = 2;             // 40 um per entry, 128 entries > 2 sigma
  localparam int  EXP_SHIFT_T = 4;             // 16 ps per entry, 2048 ps range

  // switch routing LUT: index = {layer, x >> ROUTE_SHIFT}
  localparam int  ROUTE_SHIFT = 9;             // 5.12 mm coarse bins
  localparam int  ROUTE_BW    = X_W - ROUTE_SHIFT;

  // track fitter fixed point
  localparam int  LOG_FW      = 8;             // fraction bits of log2
  localparam int  LOG_W       = 5 + LOG_FW;    // log2 of a 24-bit value
  localparam int  RATIO_FW    = 10;            // interpolation ratio, Q1.10

  // ---------------- data types ----------------
  typedef logic signed [X_W-1:0] x_t;
  typedef logic signed [T_W-1:0] t_t;
  typedef logic [ACC_W-1:0]      w_t;
  typedef logic [N_HYP-1:0][ACC_W-1:0] w3_t;   // [0]=t0-dT, [1]=t0, [2]=t0+dT

  // raw fired strip from a detector plane; eoe marks the end of an event
  typedef struct packed {
    logic               eoe;
    logic [STRIP_W-1:0] strip;
    t_t                 t;
  } strip_t;

  // hit (cluster) travelling through the mux, switch and fan-out to the engines
  typedef struct packed {
    logic               eoe;
    logic [LAYER_W-1:0] layer;
    x_t                 x;
    t_t                 t;
  } hit_t;

  // reconstructed track
  typedef struct packed {
    logic [COL_W-1:0] col;   // j, x- index of the local maximum
    logic [ROW_W-1:0] row;   // i, x+ index of the local maximum
    x_t               xp;    // interpolated x+
    x_t               xm;    // interpolated x-
    t_t               t;     // interpolated track time
    w_t               w;     // W_ij(t0) at the maximum
  } track_t;

  typedef logic [N_XM-1:0] route_mask_t;

  // ---------------- geometry functions ----------------
  function automatic real z_of_layer(int k);
    return Z_FIRST_MM + DZ_MM * k;
  endfunction

  // grid coordinates of cell (i, j), centred on zero, in x units
  function automatic int xp_of_row(int i);
    return ((2 * i - (N_XP - 1)) * DX_U) / 2;
  endfunction
  function automatic int xm_of_col(int j);
    return ((2 * j - (N_XM - 1)) * DX_U) / 2;
  endfunction

  function automatic int round_real(real r);
    return (r >= 0.0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
  endfunction

  // receptor: x of the track (x+, x-) at layer k, Eq. 1
  function automatic int receptor_x(int xp, int xm, int k);
    return xp + round_real(real'(xm) * (z_of_layer(k) - Z_PLUS_MM) / Z_MINUS_MM);
  endfunction

  // expected hit time at layer k for t_trk = 0, Eq. 2, in ps
  function automatic int receptor_t(int xm, int k);
    real s;
    s = real'(xm) * X_UNIT_MM / Z_MINUS_MM;
    return round_real(z_of_layer(k) / C_MM_PER_PS * $sqrt(1.0 + s * s));
  endfunction

  // exponential LUT entry: half 0 = space, half 1 = time; bin centre, 0 beyond 2 sigma in space
  function automatic logic [E_W-1:0] exp_entry(logic is_time, int n);
    real d, sg, v;
    d  = (real'(n) + 0.5) * real'(1 << (is_time ? EXP_SHIFT_T : EXP_SHIFT_X));
    sg = is_time ? real'(SIGMA_T_PS) : real'(SIGMA_X_U);
    if (!is_time && d >= 2.0 * sg) return '0;
    v = 255.0 * $exp(-(d * d) / (2.0 * sg * sg));
    return E_W'(round_real(v));
  endfunction

  // log2 mantissa table: round(2^LOG_FW * log2(1 + m / 64))
  function automatic logic [LOG_FW-1:0] log2_frac_entry(int m);
    return LOG_FW'(round_real(real'(1 << LOG_FW) * $ln(1.0 + real'(m) / 64.0) / $ln(2.0)));
  endfunction

  // switch routing: does column j have any receptor of layer k within 2 sigma of the
  // coarse x bin b ?
  function automatic logic route_entry(int k, int b, int j);
    int lo, hi, blo, bhi, r0, r1;
    r0  = receptor_x(xp_of_row(0), xm_of_col(j), k);
    r1  = receptor_x(xp_of_row(N_XP - 1), xm_of_col(j), k);
    lo  = ((r0 < r1) ? r0 : r1) - 2 * SIGMA_X_U;
    hi  = ((r0 < r1) ? r1 : r0) + 2 * SIGMA_X_U;
    blo = b * (1 << ROUTE_SHIFT) - (1 << (X_W - 1));
    bhi = blo + (1 << ROUTE_SHIFT) - 1;
    return (bhi >= lo) && (blo <= hi);
  endfunction

endpackage
