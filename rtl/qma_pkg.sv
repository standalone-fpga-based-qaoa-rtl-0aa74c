// qma_pkg: fixed-point formats, shared types and constants of the Quantum
// MaxCut Accelerator (QMA).
//
// The accelerator computes with two's-complement fixed point throughout. The
// idea of using fixed point comes from the design description; every word
// width and binary-point position below is this implementation's own choice,
// sized so that a 9-qubit, 8-layer run neither overflows nor loses more than
// about 1e-4 of accuracy in the final expectation value:
//
//   edge weight        WEIGHT_W=16, 8 fraction bits   (Q8.8,   signed)
//   cost_hamil_diag    COST_W=24,   8 fraction bits   (Q16.8,  signed)
//   gamma, beta        PARAM_W=16, 12 fraction bits   (Q4.12,  radians)
//   rad                RAD_W=40,   20 fraction bits   (Q20.20, radians)
//   turn fraction      TURN_W=24 bits of one turn (2*pi), unsigned
//   rad_Q1             ANG_W=21,   18 fraction bits   (radians, 0..pi/2)
//   cos_Q1, sin_Q1     TRIG_W=18,  16 fraction bits
//   state amplitudes   STATE_W=24, 16 fraction bits per real/imag part
//   expectation        EXP_W=32,   16 fraction bits
//
// Each module reads only the constants it needs, so a linter run on one
// module alone reports the others as unused; they are kept together so that
// every format has its binary point written down in one place.
package qma_pkg;

  localparam int WEIGHT_W   = 16;
  localparam int WEIGHT_FRAC = 8;
  localparam int COST_W     = 24;
  localparam int COST_FRAC  = 8;
  localparam int PARAM_W    = 16;
  localparam int PARAM_FRAC = 12;
  localparam int RAD_W      = COST_W + PARAM_W;        // full product width
  localparam int RAD_FRAC   = COST_FRAC + PARAM_FRAC;  // 20
  localparam int TURN_W     = 24;
  localparam int ANG_W      = 21;
  localparam int ANG_FRAC   = 18;
  localparam int TRIG_W     = 18;
  localparam int TRIG_FRAC  = 16;
  localparam int STATE_W    = 24;
  localparam int STATE_FRAC = 16;
  localparam int EXP_W      = 32;
  localparam int EXP_FRAC   = 16;

  // round(2^26 / (2*pi)): converts radians (RAD_FRAC) into turns.
  localparam int INV_2PI_FRAC = 26;
  localparam logic [26:0] INV_2PI = 27'd10680707;
  // round(2*pi * 2^22): converts a quadrant-folded turn fraction back to radians.
  localparam int TWO_PI_FRAC = 22;
  localparam logic [24:0] TWO_PI = 25'd26353589;

  typedef logic signed [STATE_W-1:0]  amp_t;
  typedef logic signed [COST_W-1:0]   cost_t;
  typedef logic signed [PARAM_W-1:0]  param_t;
  typedef logic signed [WEIGHT_W-1:0] weight_t;
  typedef logic signed [RAD_W-1:0]    rad_t;
  typedef logic signed [ANG_W-1:0]    ang_t;
  typedef logic signed [TRIG_W-1:0]   trig_t;
  typedef logic signed [EXP_W-1:0]    exp_t;

  // One complex state-vector component.
  typedef struct packed {
    amp_t re;
    amp_t im;
  } cplx_t;

  // Which diagonal matrix an elemental ansatz operation applies.
  typedef enum logic {
    ORDER_COST  = 1'b0,   // D_C, angle from cost_hamil_diag and gamma
    ORDER_MIXER = 1'b1    // D_M, angle from u(l, n) and beta
  } order_e;

  // Sign-adjustment bits produced by quadrant folding.
  typedef struct packed {
    logic neg_cos;
    logic neg_sin;
  } sign_adj_t;

  // Integer square root, used for constants only.
  function automatic longint isqrt(input longint v);
    longint r;
    r = 0;
    for (int b = 31; b >= 0; b--) begin
      longint t;
      t = r | (longint'(1) << b);
      if (t * t <= v) r = t;
    end
    return r;
  endfunction

endpackage
