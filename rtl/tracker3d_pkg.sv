// Shared types, geometry constants and look-up tables of the three dimensional
// track trigger (3DT).
//
// Number formats used across the design:
//   * angles (phi_i, phi_ax, TS phi, fine phi) are unsigned fractions of a full
//     turn, PHI_W = 16 bits, so 2^16 = 2*pi and angle arithmetic wraps for free;
//   * curvature rho is unsigned, RHO_W = 11 bits, LSB 2^-16 1/cm;
//   * raw TDC and event time are TDC_W = 9 bits, LSB 1 ns, so a full TDC
//     cycle covers the 500 ns drift time;
//   * z, z0 and the arc length s are in units of 1/64 cm; cot(theta) in units
//     of 2^-12.
// The counts of TS per stereo super-layer (80, 112, 144, 176 for the half of
// the drift chamber one 3DT sees) and the 10 TS per 32 ns input frame follow
// the paper. The wire radii, stereo angles, end-plate positions, x-t curve
// and hit weights are not given there: they are this design's approximate
// values of the chamber geometry, and every table below is computed from
// them by the functions below, so changing a number here regenerates the
// tables.
package tracker3d_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int NUM_SL        = 4;    // stereo super-layers SL1, SL3, SL5, SL7
  localparam int NUM_TRACKS    = 4;    // 2D tracks handled in parallel
  localparam int TS_PER_FRAME  = 10;   // TS reported per 32 ns frame per TSF
  localparam int WINDOW        = 10;   // possible stereo TSs per track and SL
  localparam int CLK_PER_FRAME = 4;    // 32 ns frame / 8 ns clock

  localparam int PHI_W = 16;
  localparam int RHO_W = 11;
  localparam int TDC_W = 9;
  localparam int ID_W  = 9;            // global TS ID, up to 351 in SL7
  localparam int Z_W   = 16;           // z, z0: signed, 1/64 cm
  localparam int S_W   = 14;           // arc length: unsigned, 1/64 cm
  localparam int COT_W = 16;           // cot(theta): signed, 2^-12
  localparam int DL_W  = 14;           // drift length in um
  localparam int W_W   = 4;            // hit weight 1/sigma^2 (integer)

  localparam int TS_MAP_LATENCY = 33;  // clocks of 8 ns, from the paper
  localparam int HOLD_CLKS      = 64;  // TS kept 512 ns after its last hit

  // TS of one stereo TSF board (half of a super-layer) and full ring
  localparam int N_HALF [NUM_SL] = '{80, 112, 144, 176};
  localparam int N_FULL [NUM_SL] = '{160, 224, 288, 352};

  // ------------------------------------------------------------ geometry
  localparam real PI = 3.14159265358979323846;
  localparam real R_CM     [NUM_SL] = '{29.9, 51.4, 72.9, 94.5};      // wire radius
  localparam real TAN_ST   [NUM_SL] = '{0.0680, -0.0625, 0.0718, -0.0750};
  localparam real Z_END_CM [NUM_SL] = '{90.0, 115.0, 135.0, 155.0};   // end plate
  localparam int  WEIGHT   [NUM_SL] = '{1, 1, 1, 1};                  // 1/sigma^2
  localparam real DRIFT_UM_PER_NS = 40.0;
  localparam real DRIFT_MAX_UM    = 10000.0;

  // ---------------------------------------------------------------- types
  // One TS as reported by a track segment finder.
  typedef struct packed {
    logic             valid;
    logic [ID_W-1:0]  id;     // local TS ID within this TSF board
    logic [TDC_W-1:0] tdc;    // raw TDC, relative to the beam revolution
    logic [1:0]       lr;     // left/right: 01 right, 10 left, else unknown
    logic [1:0]       pr;     // priority layer identification
  } ts_in_t;

  // One TS map entry (hit flag + raw TDC + LR + PR), 14 bits.
  typedef struct packed {
    logic             hit;
    logic [TDC_W-1:0] tdc;
    logic [1:0]       lr;
    logic [1:0]       pr;
  } ts_entry_t;

  // 2D fitter result for one track.
  typedef struct packed {
    logic             valid;
    logic             charge;  // 0 positive, 1 negative
    logic [RHO_W-1:0] rho;     // curvature
    logic [PHI_W-1:0] phi_i;   // incident angle
  } track2d_t;

  // Event time from the event time finder.
  typedef struct packed {
    logic             valid;
    logic [TDC_W-1:0] t;
  } evtime_t;

  // Stereo TS related to a track, for one super-layer.
  typedef struct packed {
    logic             found;
    logic [ID_W-1:0]  id;      // global TS ID (0 .. N_FULL-1)
    logic [TDC_W-1:0] tdc;
    logic [1:0]       lr;
    logic [1:0]       pr;
    logic [PHI_W-1:0] phi_ax;
  } stereo_hit_t;

  // 3D track result.
  typedef struct packed {
    logic                     valid;     // 2D track present
    logic                     charge;
    logic [RHO_W-1:0]         rho;
    logic [PHI_W-1:0]         phi_i;
    logic [NUM_SL-1:0]        found;     // stereo TS found per SL
    logic                     fit_valid; // z0 and cot valid (>= 2 stereo TSs)
    logic signed [Z_W-1:0]    z0;
    logic signed [COT_W-1:0]  cot;
  } track3d_t;

  localparam logic [1:0] LR_RIGHT = 2'b01;
  localparam logic [1:0] LR_LEFT  = 2'b10;

  // ------------------------------------------------------ table generators
  localparam int RHO_N = 1 << RHO_W;
  localparam int TDC_N = 1 << TDC_W;
  localparam int SIN_N = 8192;           // |dphi| < 1/8 turn

  // Table contents, one entry per call. A module builds its table with
  //   always_comb for (int i = 0; i < N; i++) rom[i] = <table>_val(i);
  // which unrolls to constants, i.e. a ROM.

  // acos(r*rho/2) in turns; a track that does not reach r is clamped to 0.
  function automatic logic [PHI_W-1:0] acos_val(int sl, int i);
    real x;
    x = R_CM[sl] * (real'(i) / 65536.0) / 2.0;
    if (x > 1.0) x = 1.0;
    return PHI_W'($rtoi($acos(x) / (2.0 * PI) * 65536.0 + 0.5));
  endfunction

  // Arc length s = (2/rho) asin(r*rho/2) in 1/64 cm (s = r for rho = 0).
  function automatic logic [S_W-1:0] arc_val(int sl, int i);
    real rho, x, s;
    rho = real'(i) / 65536.0;
    x = R_CM[sl] * rho / 2.0;
    if (x > 1.0) x = 1.0;
    s = (i == 0) ? R_CM[sl] : 2.0 / rho * $asin(x);
    return S_W'($rtoi(s * 64.0 + 0.5));
  endfunction

  // x-t curve: drift length in um against TDC in ns.
  function automatic logic [DL_W-1:0] xt_val(int t);
    real d;
    d = DRIFT_UM_PER_NS * real'(t);
    if (d > DRIFT_MAX_UM) d = DRIFT_MAX_UM;
    return DL_W'($rtoi(d + 0.5));
  endfunction

  // sin(a/2), a in 2^-16 turn, as a 0.16 fraction (indexed by the full
  // stereo displacement, so no bit is lost in the halving).
  function automatic logic [15:0] sin_val(int a);
    return 16'($rtoi($sin(PI * real'(a) / 65536.0) * 65536.0 + 0.5));
  endfunction

  // Per-SL multipliers.
  // TS ID -> phi: (id * ID2PHI) >> 8 gives 2^-16 turn.
  function automatic int id2phi_k(int sl);
    return $rtoi(16777216.0 / real'(N_FULL[sl]) + 0.5);
  endfunction
  // drift length (um) -> phi: (dl * DL2PHI) >> 16 gives 2^-16 turn.
  function automatic int dl2phi_k(int sl);
    return $rtoi(4294967296.0 / (2.0 * PI * R_CM[sl] * 1.0e4) + 0.5);
  endfunction
  // 2r/tan(theta_st) in 1/64 cm.
  function automatic int zc_k(int sl);
    return $rtoi(64.0 * 2.0 * R_CM[sl] / TAN_ST[sl] + ((TAN_ST[sl] > 0.0) ? 0.5 : -0.5));
  endfunction
  // z_endplate in 1/64 cm.
  function automatic int zend_k(int sl);
    return $rtoi(64.0 * Z_END_CM[sl] + 0.5);
  endfunction

endpackage
