// qma_expectation: computes the expectation value returned by
// get_expectation,
//   F = sum_k |state[k]|^2 * C(k),  C(k) = cost_hamil_diag[k] / 2,
// i.e. the probability-weighted cut weight of the final ansatz state (the
// diagonal stores twice the cut weight, following the set_cost_hamiltonian
// rule, so the sum is halved).
//
// A start pulse walks k from 0 to NUM_STATE-1, one state per clock: the
// first register stage holds |state[k]|^2 (re^2 + im^2) and C's diagonal
// entry, the second multiplies and accumulates. done pulses, and value is
// valid, NUM_STATE+2 clocks after start; value holds until the next start.
// The design description says only that the accelerator returns this value;
// the sequential single-multiplier organisation and the Q16.16 result
// format are this implementation's choices.
// Only the low EXP_W bits of the shifted accumulator are kept: the
// expectation of a cut never exceeds the sum of all weights, which fits.
module qma_expectation
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT = 9,
  localparam int NUM_STATE = 1 << NUM_QUBIT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  cplx_t                state [NUM_STATE],
  output logic [NUM_QUBIT-1:0] cost_idx,
  input  cost_t                cost_diag,
  output logic                 busy,
  output logic                 done,
  output exp_t                 value
);

  localparam int P_W   = 2 * STATE_W + 1;   // |amp|^2, 2*STATE_FRAC fraction bits
  localparam int ACC_W = P_W + COST_W + NUM_QUBIT + 1;
  // acc has 2*STATE_FRAC + COST_FRAC fraction bits; one more bit halves it.
  localparam int OUT_SHIFT = 2 * STATE_FRAC + COST_FRAC - EXP_FRAC + 1;

  logic [NUM_QUBIT-1:0]     idx;
  logic                     active;
  logic                     v1, l1, fin;
  logic [P_W-1:0]           p_q;
  cost_t                    c_q;
  logic signed [ACC_W-1:0]  acc;
  cplx_t                    sel;
  logic signed [ACC_W-1:0]  acc_shifted;

  assign sel         = state[idx];
  assign cost_idx    = idx;
  assign busy        = active || v1 || fin;
  assign acc_shifted = acc >>> OUT_SHIFT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx    <= '0;
      active <= 1'b0;
      v1     <= 1'b0;
      l1     <= 1'b0;
      fin    <= 1'b0;
      p_q    <= '0;
      c_q    <= '0;
      acc    <= '0;
      done   <= 1'b0;
      value  <= '0;
    end else begin
      // stage 1: fetch state[idx] and its diagonal entry, square the amplitude
      v1 <= active;
      l1 <= active && (idx == NUM_QUBIT'(NUM_STATE - 1));
      if (active) begin
        p_q <= P_W'(sel.re) * P_W'(sel.re) + P_W'(sel.im) * P_W'(sel.im);
        c_q <= cost_diag;
      end
      // stage 2: weight and accumulate at full precision
      if (v1) acc <= acc + ACC_W'($signed({1'b0, p_q})) * ACC_W'(c_q);
      fin  <= v1 && l1;
      done <= fin;
      if (fin) value <= exp_t'(acc_shifted);
      // index walk
      if (start) begin
        idx    <= '0;
        active <= 1'b1;
        acc    <= '0;
      end else if (active) begin
        idx <= idx + 1'b1;
        if (idx == NUM_QUBIT'(NUM_STATE - 1)) active <= 1'b0;
      end
    end
  end

endmodule
