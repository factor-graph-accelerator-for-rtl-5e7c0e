// fg_pkg: types, constants and arithmetic shared by the factor-graph solver.
//
// Every matrix entry, residual and state value is a signed 32-bit fixed-point
// number with 16 fraction bits (Q15.16). The reference design computes in
// 32-bit floating point; fixed point is this implementation's own choice so
// that the datapath stays a plain integer multiplier, an iterative divider
// and an iterative square root. fx_mul truncates toward minus infinity.
//
// The default sizes describe one LiDAR-inertial keyframe: a 15-dimensional
// variable (pose 6, velocity 3, IMU biases 6), a 3-row GPS factor on every
// keyframe, and 21 rows (LiDAR odometry 6 + IMU preintegration 15) on every
// pair of adjacent keyframes. The chain holds up to 30 keyframes and each
// QR block has 9 Update units, the largest configuration that was evaluated.
package fg_pkg;
  parameter int unsigned WORD_W = 32;
  parameter int unsigned FRAC_W = 16;

  typedef logic signed [WORD_W-1:0] fx_t;

  parameter fx_t FX_ONE = fx_t'(1 <<< FRAC_W);

  parameter int unsigned VAR_DIM_DEF   = 15;  // dimension of one keyframe variable
  parameter int unsigned GPS_ROWS_DEF  = 3;   // rows of the unary (GPS) factor
  parameter int unsigned EDGE_ROWS_DEF = 21;  // rows of the binary (LiDAR + IMU) factor
  parameter int unsigned KF_MAX_DEF    = 30;  // keyframes in the chain
  parameter int unsigned NU_DEF        = 9;   // Update units per QR block

  // Elimination order of the chain.
  typedef enum logic {
    ELIM_SERIAL   = 1'b0,  // one QR block, x_lo -> x_hi, root at x_hi
    ELIM_PARALLEL = 1'b1   // two QR blocks from both ends, root in the middle
  } elim_mode_e;

  // Which kind of factor a linear-system write addresses.
  typedef enum logic {
    FAC_UNARY  = 1'b0,  // GPS factor g_j(x_j): GPS_ROWS x (VAR_DIM + 1)
    FAC_BINARY = 1'b1   // between factor b_j(x_j, x_j+1): EDGE_ROWS x (2 VAR_DIM + 1)
  } fac_kind_e;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*WORD_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC_W);
  endfunction

  function automatic fx_t fx_abs(fx_t a);
    return a[WORD_W-1] ? -a : a;
  endfunction
endpackage
