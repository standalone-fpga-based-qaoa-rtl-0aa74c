// qma_top: the Quantum MaxCut Accelerator (QMA), an AXI4-Lite peripheral that
// emulates an n-qubit QAOA circuit for Weighted-MaxCut and returns the
// expectation value of the cut weight.
//
// Structure (left to right as data flows):
//   qma_axi_slave      host registers: parameters, edges, start, result
//   qma_param_regs     gamma[layer], beta[layer]
//   qma_cost_hamil     cost_hamil_diag[0..N-1], built edge by edge
//   qma_ctrl           order/layer sequencing of the 2p elemental operations
//   qma_calc_rad       CALCULATE_RAD   angle of diagonal element count_1st
//   qma_normalize_rad  NORMALIZE_RAD   mod 2*pi, fold to first quadrant
//   qma_cordic         CORDIC          16-stage cos/sin
//   qma_one_mult       1_MULT          state[count_4th] * (cos + i sin)
//   qma_n_add          N_ADD           result[i] +-= mult, sign from H1
//   qma_state_regs     state[0..N-1], |s> at start, reloaded from result
//   qma_expectation    sum |state|^2 * C
// Each elemental operation streams the N = 2^NUM_QUBIT diagonal elements
// through the five stages at one element per clock, so it takes N + 22
// clocks (N issue cycles, a 20-register pipeline and two control cycles);
// a whole run of p layers takes 2p*(N + 22) + N + 5 clocks from the write
// that starts it until STATUS.done. The register map is given in
// qma_axi_slave. The module boundary is the accelerator's AXI port; the
// RISC-V host, memory and interconnect of the surrounding system are not
// part of it.
// The busy output of the expectation unit is not needed here, since the
// controller waits for its done pulse. rst_n also disables the overlap
// assertion, so a linter may report it as a synchronous net as well.
module qma_top
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT  = 9,
  parameter int MAX_LAYERS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic        busy,
  output logic        done
);

  localparam int NUM_STATE = 1 << NUM_QUBIT;
  localparam int LW        = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1;
  localparam int RES_W     = STATE_W + NUM_QUBIT + 1;

  // host side
  logic          start, ham_clear, param_wr, edge_valid, edge_ok;
  logic [LW:0]   num_layers;
  order_e        param_sel;
  logic [LW-1:0] layer_sel;
  param_t        param_data, hrd_gamma, hrd_beta;
  logic [7:0]    edge_i, edge_j;
  weight_t       edge_w;
  exp_t          expectation;

  // control
  order_e        order;
  logic [LW-1:0] layer;
  logic          op_start, op_done, state_init, state_load, state_scale;
  logic          exp_start, exp_done, exp_busy, rad_busy;

  // pipeline
  param_t               gamma, beta;
  logic [NUM_QUBIT-1:0] rad_cost_idx, exp_cost_idx;
  cost_t                rad_cost, exp_cost;
  rad_t                 rad;
  logic                 rad_valid, q1_valid, trig_valid, mult_valid;
  ang_t                 rad_q1;
  sign_adj_t            q1_sign, trig_sign;
  trig_t                cos_q1, sin_q1;
  cplx_t                mult;
  cplx_t                state [NUM_STATE];
  logic signed [RES_W-1:0] result_re [NUM_STATE];
  logic signed [RES_W-1:0] result_im [NUM_STATE];

  qma_axi_slave #(.NUM_QUBIT(NUM_QUBIT), .MAX_LAYERS(MAX_LAYERS)) u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .start, .ham_clear, .num_layers, .param_wr, .param_sel, .layer_sel,
    .param_data, .edge_valid, .edge_i, .edge_j, .edge_w, .edge_ok,
    .rd_gamma(hrd_gamma), .rd_beta(hrd_beta), .busy, .done, .expectation
  );

  qma_param_regs #(.MAX_LAYERS(MAX_LAYERS)) u_param (
    .clk, .rst_n,
    .wr_en(param_wr), .wr_sel(param_sel), .wr_layer(layer_sel), .wr_data(param_data),
    .rd_layer(layer), .gamma, .beta,
    .hrd_layer(layer_sel), .hrd_gamma, .hrd_beta
  );

  qma_cost_hamil #(.NUM_QUBIT(NUM_QUBIT)) u_ham (
    .clk, .rst_n, .clear(ham_clear),
    .edge_valid, .edge_i, .edge_j, .edge_w, .edge_ok,
    .rd_idx1(rad_cost_idx), .rd_data1(rad_cost),
    .rd_idx2(exp_cost_idx), .rd_data2(exp_cost)
  );

  qma_ctrl #(.MAX_LAYERS(MAX_LAYERS)) u_ctrl (
    .clk, .rst_n, .start, .num_layers, .op_done, .exp_done,
    .busy, .done, .order, .layer, .op_start, .state_init, .state_load,
    .state_scale, .exp_start
  );

  qma_calc_rad #(.NUM_QUBIT(NUM_QUBIT)) u_calc (
    .clk, .rst_n, .start(op_start), .order, .gamma, .beta,
    .cost_idx(rad_cost_idx), .cost_diag(rad_cost),
    .rad, .rad_valid, .busy(rad_busy)
  );

  qma_normalize_rad u_norm (
    .clk, .rst_n, .in_valid(rad_valid), .rad,
    .out_valid(q1_valid), .rad_q1, .sign_adj(q1_sign)
  );

  qma_cordic #(.STAGES(16)) u_cordic (
    .clk, .rst_n, .in_valid(q1_valid), .angle(rad_q1), .side_in(q1_sign),
    .out_valid(trig_valid), .cos_o(cos_q1), .sin_o(sin_q1), .side_out(trig_sign)
  );

  qma_one_mult #(.NUM_QUBIT(NUM_QUBIT)) u_mult (
    .clk, .rst_n, .clear(op_start), .in_valid(trig_valid),
    .cos_q1, .sin_q1, .sign_adj(trig_sign), .state, .mult, .mult_valid
  );

  qma_n_add #(.NUM_QUBIT(NUM_QUBIT)) u_nadd (
    .clk, .rst_n, .clear(op_start), .in_valid(mult_valid), .mult,
    .result_re, .result_im, .done(op_done)
  );

  qma_state_regs #(.NUM_QUBIT(NUM_QUBIT)) u_state (
    .clk, .rst_n, .init(state_init), .load(state_load), .scale(state_scale),
    .result_re, .result_im, .state
  );

  qma_expectation #(.NUM_QUBIT(NUM_QUBIT)) u_exp (
    .clk, .rst_n, .start(exp_start), .state,
    .cost_idx(exp_cost_idx), .cost_diag(exp_cost),
    .busy(exp_busy), .done(exp_done), .value(expectation)
  );

  // The pipeline never restarts while a previous operation is still issuing.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    op_start |-> !rad_busy);

endmodule
