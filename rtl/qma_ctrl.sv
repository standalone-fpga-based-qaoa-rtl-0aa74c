// qma_ctrl: sequencer of one QAOA emulation run (activate_maxcut).
//
// A run applies the elemental ansatz operation H1*D 2p times: for each layer
// first with D_C (order = ORDER_COST), then with D_M (order = ORDER_MIXER).
// The registers order and layer select the operands of CALCULATE_RAD, as in
// the design description. Per operation the controller pulses op_start
// (which restarts count_1st and clears count_4th, count_5th and the result
// registers), waits for the N_ADD stage to report all NUM_STATE terms
// accumulated (op_done), then pulses state_load, with state_scale set after
// the mixer operation. After the last layer it starts the expectation unit
// and, when that finishes, raises done (held until the next start) and
// drops busy.
//
// States: IDLE -> INIT (state := |s>) -> { OP_START -> OP_WAIT -> LOAD } x 2p
//         -> EXP_START -> EXP_WAIT -> IDLE.
// With num_layers = 0 the run measures the start state |s> directly. A
// num_layers above MAX_LAYERS is treated as MAX_LAYERS. The state machine
// itself, and its exact cycle timing, are this implementation's choices:
// a run takes 2p*(NUM_STATE + 22) + NUM_STATE + 5 clocks from the start
// pulse to done (see the accelerator's top-level description).
module qma_ctrl
  import qma_pkg::*;
#(
  parameter int MAX_LAYERS = 8,
  localparam int LW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW:0]   num_layers,
  input  logic          op_done,
  input  logic          exp_done,
  output logic          busy,
  output logic          done,
  output order_e        order,
  output logic [LW-1:0] layer,
  output logic          op_start,
  output logic          state_init,
  output logic          state_load,
  output logic          state_scale,
  output logic          exp_start
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_OP_START, S_OP_WAIT, S_LOAD, S_EXP_START, S_EXP_WAIT
  } state_e;

  state_e      st;
  logic [LW:0] p_eff;

  assign p_eff = (int'(num_layers) > MAX_LAYERS) ? (LW+1)'(MAX_LAYERS) : num_layers;

  assign busy        = (st != S_IDLE);
  assign state_init  = (st == S_INIT);
  assign op_start    = (st == S_OP_START);
  assign state_load  = (st == S_LOAD);
  assign state_scale = (st == S_LOAD) && (order == ORDER_MIXER);
  assign exp_start   = (st == S_EXP_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      done  <= 1'b0;
      order <= ORDER_COST;
      layer <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          st    <= S_INIT;
          done  <= 1'b0;
          order <= ORDER_COST;
          layer <= '0;
        end
        S_INIT:     st <= (p_eff == '0) ? S_EXP_START : S_OP_START;
        S_OP_START: st <= S_OP_WAIT;
        S_OP_WAIT:  if (op_done) st <= S_LOAD;
        S_LOAD: begin
          if (order == ORDER_COST) begin
            order <= ORDER_MIXER;
            st    <= S_OP_START;
          end else begin
            order <= ORDER_COST;
            if ((LW+1)'(layer) + 1'b1 >= p_eff) begin
              st <= S_EXP_START;
            end else begin
              layer <= layer + 1'b1;
              st    <= S_OP_START;
            end
          end
        end
        S_EXP_START: st <= S_EXP_WAIT;
        S_EXP_WAIT: if (exp_done) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
