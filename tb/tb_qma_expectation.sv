// tb_qma_expectation: checks the expectation unit with 4 qubits. A random
// state vector and cost diagonal are applied; the expected value
// sum_k (re^2 + im^2) * diag[k] / 2 is computed in double precision and the
// hardware result (Q16.16) must match within 2 LSB. done must pulse exactly
// NUM_STATE + 2 clock edges after the edge that samples start (the testbench
// applies start half a clock earlier, so it counts N + 3 negative edges), and
// a second run must restart the sum.
module tb_qma_expectation;
  import qma_pkg::*;
  localparam int NQ = 4, N = 1 << NQ;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  cplx_t state [N];
  logic [NQ-1:0] cost_idx;
  cost_t cost_diag;
  exp_t value;
  int checks = 0, failures = 0;
  int diag [N];

  assign cost_diag = cost_t'(diag[cost_idx]);
  qma_expectation #(.NUM_QUBIT(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input string tag);
    real f, got;
    int lat;
    f = 0.0;
    for (int k = 0; k < N; k++) begin
      state[k].re = amp_t'(int'($urandom_range(0, 40000)) - 20000);
      state[k].im = amp_t'(int'($urandom_range(0, 40000)) - 20000);
      diag[k] = int'($urandom_range(0, 8000));
      f += (real'(state[k].re) ** 2 + real'(state[k].im) ** 2) / 4294967296.0 * real'(diag[k]) / 256.0 / 2.0;
    end
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 1;
    while (!done && lat < 100) begin
      check(busy, {tag, ": busy while running"});
      @(negedge clk);
      lat++;
    end
    check(lat == N + 3, $sformatf("%s: latency %0d", tag, lat));
    got = real'(value) / 65536.0;
    check(got - f < 3.0e-5 && f - got < 3.0e-5, $sformatf("%s: value %f expected %f", tag, got, f));
    @(negedge clk);
    check(!done && !busy, {tag, ": done is a pulse"});
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run("first");
    run("second");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
