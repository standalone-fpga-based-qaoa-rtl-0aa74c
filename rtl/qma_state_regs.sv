// qma_state_regs: the state-vector registers state[0 .. NUM_STATE-1].
//
// init loads the QAOA start state |s> = H^n |0>: every component gets the
// real amplitude 1/sqrt(2^n) (INIT_AMP, rounded down) and zero imaginary
// part. load copies the accumulated result of the N_ADD stage back into the
// state once an elemental ansatz operation has finished. Because the
// pipeline uses the unnormalised Hadamard matrix H1, the pair of operations
// of one layer grows the vector by 2^n; with scale set, load divides by 2^n
// with a rounding arithmetic shift, the bit-shift scaling of the design
// description. This implementation applies that shift once per layer, after
// the mixer operation, so the intermediate state after the cost operation
// is sqrt(2^n) times too large and the state format keeps integer bits for
// it. Values are saturated into the state format. All outputs are registers;
// a load is visible one clock later.
module qma_state_regs
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT = 9,
  localparam int NUM_STATE = 1 << NUM_QUBIT,
  localparam int RES_W = STATE_W + NUM_QUBIT + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic                    load,
  input  logic                    scale,
  input  logic signed [RES_W-1:0] result_re [NUM_STATE],
  input  logic signed [RES_W-1:0] result_im [NUM_STATE],
  output cplx_t                   state [NUM_STATE]
);

  localparam longint INIT_AMP_L = isqrt((longint'(1) << (2 * STATE_FRAC)) / longint'(NUM_STATE));
  localparam amp_t   INIT_AMP   = amp_t'(INIT_AMP_L);
  localparam logic signed [RES_W-1:0] AMP_MAX = RES_W'((longint'(1) << (STATE_W-1)) - 1);
  localparam logic signed [RES_W-1:0] AMP_MIN = -RES_W'(longint'(1) << (STATE_W-1));

  function automatic amp_t rescale(input logic signed [RES_W-1:0] v, input logic sc);
    logic signed [RES_W-1:0] r;
    r = sc ? ((v + RES_W'(1 << (NUM_QUBIT-1))) >>> NUM_QUBIT) : v;
    if (r > AMP_MAX)      return amp_t'(AMP_MAX);
    else if (r < AMP_MIN) return amp_t'(AMP_MIN);
    else                  return amp_t'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_STATE; k++) state[k] <= '0;
    end else if (init) begin
      for (int k = 0; k < NUM_STATE; k++) begin
        state[k].re <= INIT_AMP;
        state[k].im <= '0;
      end
    end else if (load) begin
      for (int k = 0; k < NUM_STATE; k++) begin
        state[k].re <= rescale(result_re[k], scale);
        state[k].im <= rescale(result_im[k], scale);
      end
    end
  end

endmodule
