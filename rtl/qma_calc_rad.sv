// qma_calc_rad: CALCULATE_RAD, the first pipeline stage. It produces, one per
// clock, the rotation angle of each diagonal element of D_C or D_M.
//
// A start pulse clears the counter count_1st and the stage then issues
// NUM_STATE angles on consecutive cycles. For element l = count_1st:
//   order = ORDER_COST : rad = -(cost_hamil_diag[l] * gamma[layer])
//   order = ORDER_MIXER: rad =  u(l, n) * beta[layer],  u = 2*HW(l) - n
// HW(l) comes from a ones counter, u from a "x2 - n" unit, and a single
// multiplier serves both cases behind two operand multiplexers steered by
// order, as in the register-level schematic. rad is registered, so it (with
// rad_valid) appears one clock after its index was on cost_idx.
//
// Sign of the cost angle: the design description writes both D_C = e^{-i
// gamma H_C} and "rad = cost_hamil_diag * gamma" followed by a multiplication
// by cos(rad) + i sin(rad). The two disagree in sign; this stage follows the
// equation and negates the cost angle, so that the emulated state is the true
// QAOA state. The layer's gamma/beta arrive already selected from
// qma_param_regs.
module qma_calc_rad
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT = 9,
  localparam int NUM_STATE = 1 << NUM_QUBIT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  order_e               order,
  input  param_t               gamma,
  input  param_t               beta,
  output logic [NUM_QUBIT-1:0] cost_idx,   // = count_1st
  input  cost_t                cost_diag,  // cost_hamil_diag[cost_idx]
  output rad_t                 rad,
  output logic                 rad_valid,
  output logic                 busy
);

  logic [NUM_QUBIT-1:0] count_1st;
  logic                 active;
  logic [$clog2(NUM_QUBIT+1)-1:0] ones;
  cost_t                u_fix;      // u(l, n) in the cost_t fixed-point format
  cost_t                op_a;
  param_t               op_b;
  rad_t                 prod;

  // 1's counter and "x2 - n".
  always_comb begin
    ones = '0;
    for (int b = 0; b < NUM_QUBIT; b++) ones += count_1st[b];
  end
  assign u_fix = cost_t'((2 * int'(ones) - NUM_QUBIT) * (1 << COST_FRAC));

  assign op_a = (order == ORDER_MIXER) ? u_fix : cost_diag;
  assign op_b = (order == ORDER_MIXER) ? beta  : gamma;
  assign prod = rad_t'(op_a) * rad_t'(op_b);

  assign cost_idx = count_1st;
  assign busy     = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_1st <= '0;
      active    <= 1'b0;
      rad       <= '0;
      rad_valid <= 1'b0;
    end else begin
      rad_valid <= active;
      if (active) rad <= (order == ORDER_MIXER) ? prod : -prod;
      if (start) begin
        count_1st <= '0;
        active    <= 1'b1;
      end else if (active) begin
        count_1st <= count_1st + 1'b1;
        if (count_1st == NUM_QUBIT'(NUM_STATE - 1)) active <= 1'b0;
      end
    end
  end

endmodule
