// tb_qma_n_add: checks the N_ADD stage with 3 qubits. NUM_STATE random
// complex products are streamed in with a bubble between some of them; the
// expected result is the Hadamard transform sum_c (-1)^popcount(i & c) m_c,
// computed here with a direct double loop. done must rise exactly after the
// last term, further inputs must be ignored, and clear must zero everything.
module tb_qma_n_add;
  import qma_pkg::*;
  localparam int NQ = 3, N = 1 << NQ, RES_W = STATE_W + NQ + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, in_valid = 1'b0, done;
  cplx_t mult = '0;
  logic signed [RES_W-1:0] result_re [N];
  logic signed [RES_W-1:0] result_im [N];
  int checks = 0, failures = 0;
  longint m_re [N], m_im [N];

  qma_n_add #(.NUM_QUBIT(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input string tag);
    for (int c = 0; c < N; c++) begin
      m_re[c] = longint'(int'($urandom_range(0, 1 << 23)) - (1 << 22));
      m_im[c] = longint'(int'($urandom_range(0, 1 << 23)) - (1 << 22));
    end
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    check(!done, {tag, ": done low after clear"});
    for (int c = 0; c < N; c++) begin
      @(negedge clk);
      mult.re = amp_t'(m_re[c]); mult.im = amp_t'(m_im[c]); in_valid = 1'b1;
      if (c == 3) begin in_valid = 1'b0; @(negedge clk); mult.re = amp_t'(m_re[c]); in_valid = 1'b1; end
      #1 check(!done, {tag, ": done not early"});
    end
    @(negedge clk); in_valid = 1'b1; mult.re = 24'sd12345;   // must be ignored
    @(negedge clk); in_valid = 1'b0;
    check(done, {tag, ": done"});
    for (int i = 0; i < N; i++) begin
      longint er, ei;
      er = 0; ei = 0;
      for (int c = 0; c < N; c++) begin
        if ($countones(i & c) % 2 == 1) begin er -= m_re[c]; ei -= m_im[c]; end
        else begin er += m_re[c]; ei += m_im[c]; end
      end
      check(longint'(result_re[i]) == er && longint'(result_im[i]) == ei,
            $sformatf("%s: result[%0d] = (%0d,%0d) expected (%0d,%0d)", tag, i, result_re[i], result_im[i], er, ei));
    end
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
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    for (int i = 0; i < N; i++) check(result_re[i] == 0 && result_im[i] == 0, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
