// qma_normalize_rad: NORMALIZE_RAD, the second pipeline stage. It reduces
// rad modulo 2*pi and folds it into the first quadrant for the CORDIC.
//
// The reduction is done in turns rather than by division: rad (radians,
// RAD_FRAC fraction bits) is multiplied by the constant 1/(2*pi), and the
// TURN_W bits just below the binary point of the product are rad mod 2*pi
// as a fraction t of a turn (two's complement makes negative angles wrap to
// the right place). The top two bits of t give the quadrant:
//   Q1 [0, pi/2)     : rad_Q1 = t               signs unchanged
//   Q2 [pi/2, pi)    : rad_Q1 = pi - t          neg_cos
//   Q3 [pi, 3pi/2)   : rad_Q1 = t - pi          neg_cos, neg_sin
//   Q4 [3pi/2, 2pi)  : rad_Q1 = 2pi - t         neg_sin
// exactly the case split of the design description. The folded turn
// fraction is then multiplied by 2*pi to give rad_Q1 in radians (ANG_FRAC
// fraction bits) for the CORDIC. Outputs are registered: one clock from
// rad/in_valid to rad_q1/out_valid. Working in turns with two constant
// multipliers is this implementation's choice of how to compute the modulo.
// Only the TURN_W bits of the product just below the binary point are used:
// the integer part is whole turns and the bits below are discarded.
module qma_normalize_rad
  import qma_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  rad_t      rad,
  output logic      out_valid,
  output ang_t      rad_q1,
  output sign_adj_t sign_adj
);

  localparam int TURN_PROD_W = RAD_W + 28;
  localparam int TURN_LSB    = RAD_FRAC + INV_2PI_FRAC - TURN_W;
  localparam int ANG_SHIFT   = TURN_W + TWO_PI_FRAC - ANG_FRAC;

  logic signed [TURN_PROD_W-1:0] turn_prod;
  logic [TURN_W-1:0]             t;
  logic [1:0]                    quad;
  logic [TURN_W:0]               tq;        // folded fraction, 0 .. 1/4 turn
  logic [TURN_W+25:0]            ang_prod;
  ang_t                          ang_c;
  sign_adj_t                     sign_c;

  assign turn_prod = TURN_PROD_W'(rad) * $signed({1'b0, INV_2PI});
  assign t         = turn_prod[TURN_LSB +: TURN_W];
  assign quad      = t[TURN_W-1 -: 2];

  always_comb begin
    unique case (quad)
      2'd0:    tq = {1'b0, t};
      2'd1:    tq = (TURN_W+1)'(1 << (TURN_W-1)) - {1'b0, t};
      2'd2:    tq = {1'b0, t} - (TURN_W+1)'(1 << (TURN_W-1));
      default: tq = (TURN_W+1)'(1 << TURN_W) - {1'b0, t};
    endcase
    sign_c.neg_cos = (quad == 2'd1) || (quad == 2'd2);
    sign_c.neg_sin = (quad == 2'd2) || (quad == 2'd3);
  end

  assign ang_prod = (TURN_W+26)'(tq) * (TURN_W+26)'(TWO_PI);
  assign ang_c    = ang_t'(ang_prod >> ANG_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rad_q1    <= '0;
      sign_adj  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        rad_q1   <= ang_c;
        sign_adj <= sign_c;
      end
    end
  end

endmodule
