// qma_one_mult: 1_MULT, the single complex multiplier of the pipeline.
//
// For each diagonal element leaving the CORDIC (in_valid), the counter
// count_4th selects state[count_4th] from the state vector through an
// N-to-1 multiplexer, the CORDIC's first-quadrant cos/sin are given their
// signs back (neg_cos, neg_sin), and the product
//   Re(mult) = Re(state)*cos - Im(state)*sin
//   Im(mult) = Re(state)*sin + Im(state)*cos
// is rounded to the state format and registered in mult together with
// mult_valid, one clock after the inputs. This is the only multiplication of
// the elemental ansatz operation: one per clock, never N in parallel, which
// is the central resource saving of the design. clear (the start of an
// operation) returns count_4th to zero. The formula, counter and mux follow
// the design description; rounding to nearest is this implementation's
// choice.
module qma_one_mult
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT = 9,
  localparam int NUM_STATE = 1 << NUM_QUBIT
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      in_valid,
  input  trig_t     cos_q1,
  input  trig_t     sin_q1,
  input  sign_adj_t sign_adj,
  input  cplx_t     state [NUM_STATE],
  output cplx_t     mult,
  output logic      mult_valid
);

  localparam int PROD_W = STATE_W + TRIG_W + 1;

  logic [NUM_QUBIT-1:0]      count_4th;
  cplx_t                     sel;
  trig_t                     c, s;
  logic signed [PROD_W-1:0]  re_p, im_p;

  assign sel = state[count_4th];
  assign c   = sign_adj.neg_cos ? -cos_q1 : cos_q1;
  assign s   = sign_adj.neg_sin ? -sin_q1 : sin_q1;

  assign re_p = PROD_W'(sel.re) * PROD_W'(c) - PROD_W'(sel.im) * PROD_W'(s)
              + PROD_W'(1 << (TRIG_FRAC - 1));
  assign im_p = PROD_W'(sel.re) * PROD_W'(s) + PROD_W'(sel.im) * PROD_W'(c)
              + PROD_W'(1 << (TRIG_FRAC - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_4th  <= '0;
      mult       <= '0;
      mult_valid <= 1'b0;
    end else begin
      mult_valid <= in_valid && !clear;
      if (clear) begin
        count_4th <= '0;
      end else if (in_valid) begin
        mult.re   <= amp_t'(re_p >>> TRIG_FRAC);
        mult.im   <= amp_t'(im_p >>> TRIG_FRAC);
        count_4th <= count_4th + 1'b1;
      end
    end
  end

endmodule
