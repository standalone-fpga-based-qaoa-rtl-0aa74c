// tb_qma_calc_rad: checks CALCULATE_RAD with 4 qubits. The cost diagonal is
// a testbench table looked up combinationally through cost_idx. For a cost
// operation every rad must equal -(diag[l] * gamma), for a mixer operation
// (2*popcount(l) - n) * 2^8 * beta, computed here independently. The stage
// must emit exactly NUM_STATE values on consecutive cycles, the first one
// two clocks after the start pulse is applied.
module tb_qma_calc_rad;
  import qma_pkg::*;
  localparam int NQ = 4, N = 1 << NQ;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, rad_valid, busy;
  order_e order = ORDER_COST;
  param_t gamma = '0, beta = '0;
  logic [NQ-1:0] cost_idx;
  cost_t cost_diag;
  rad_t rad;
  int checks = 0, failures = 0;
  int diag [N];

  assign cost_diag = cost_t'(diag[cost_idx]);
  qma_calc_rad #(.NUM_QUBIT(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_op(input order_e o);
    int got, first;
    got = 0; first = -1;
    @(negedge clk); order = o; start = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int c = 1; c < N + 6; c++) begin
      if (rad_valid) begin
        longint e;
        if (first < 0) first = c;
        if (o == ORDER_COST) e = -(longint'(diag[got]) * longint'(gamma));
        else begin
          int u;
          u = 2 * $countones(got) - NQ;
          e = longint'(u) * 256 * longint'(beta);
        end
        check(longint'(rad) == e, $sformatf("order %0d element %0d: rad %0d expected %0d", o, got, rad, e));
        got++;
      end
      @(negedge clk);
    end
    check(got == N, $sformatf("order %0d: %0d values", o, got));
    check(first == 2, $sformatf("order %0d: first value at %0d", o, first));
    check(!busy, "busy dropped");
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) diag[k] = int'($urandom_range(0, 1 << 20)) - (1 << 19);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    gamma = 16'sd3001; beta = -16'sd1777;
    run_op(ORDER_COST);
    run_op(ORDER_MIXER);
    gamma = -16'sd32768; beta = 16'sd32767;
    run_op(ORDER_COST);
    run_op(ORDER_MIXER);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
