// tb_qma_one_mult: checks the 1_MULT stage with 3 qubits. The state vector
// is filled with random complex values; a stream of random cos/sin pairs
// with random sign-adjustment bits is applied. Output k (one clock after
// input k) must equal state[k] * (+-cos + i*(+-sin)), computed here with
// 64-bit integers and round-to-nearest, and a clear must restart the walk
// through the state at element 0.
module tb_qma_one_mult;
  import qma_pkg::*;
  localparam int NQ = 3, N = 1 << NQ;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, in_valid = 1'b0, mult_valid;
  trig_t cos_q1 = '0, sin_q1 = '0;
  sign_adj_t sign_adj = '0;
  cplx_t state [N];
  cplx_t mult;
  int checks = 0, failures = 0;

  qma_one_mult #(.NUM_QUBIT(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input int k);
    longint c, s, re, im, er, ei;
    @(negedge clk);
    cos_q1 = trig_t'($urandom_range(0, 65536));
    sin_q1 = trig_t'($urandom_range(0, 65536));
    sign_adj = sign_adj_t'($urandom_range(0, 3));
    in_valid = 1'b1;
    c = sign_adj.neg_cos ? -longint'(cos_q1) : longint'(cos_q1);
    s = sign_adj.neg_sin ? -longint'(sin_q1) : longint'(sin_q1);
    re = longint'(state[k].re); im = longint'(state[k].im);
    er = (re * c - im * s + 32768) >>> 16;
    ei = (re * s + im * c + 32768) >>> 16;
    @(negedge clk);
    in_valid = 1'b0;
    check(mult_valid, "mult_valid");
    check(longint'(mult.re) == er && longint'(mult.im) == ei,
          $sformatf("element %0d: got (%0d,%0d) expected (%0d,%0d)", k, mult.re, mult.im, er, ei));
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) begin
      state[k].re = amp_t'(int'($urandom_range(0, 1 << 20)) - (1 << 19));
      state[k].im = amp_t'(int'($urandom_range(0, 1 << 20)) - (1 << 19));
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) one(k);
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    for (int k = 0; k < 3; k++) one(k);
    @(negedge clk);
    check(!mult_valid, "no output without input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
