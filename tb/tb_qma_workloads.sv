// tb_qma_workloads: the execution-time workload of the evaluation, an
// 8-layer QAOA Weighted-MaxCut emulation, at every qubit count it was
// measured for: n = 2, 3, 4, 6, 8 and 9. One accelerator is built per size
// (tb_qma_run) and all six jobs run side by side; each checks its
// expectation value and final state against a floating-point reference and
// its run time against 2p(N+22)+N+5 clocks.
module tb_qma_workloads;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;
  localparam int K = 6;
  logic fin [K];
  int   c [K], f [K];

  tb_qma_run #(.NQ(2), .P(8)) r2 (.clk, .rst_n, .go, .finished(fin[0]), .checks(c[0]), .failures(f[0]));
  tb_qma_run #(.NQ(3), .P(8)) r3 (.clk, .rst_n, .go, .finished(fin[1]), .checks(c[1]), .failures(f[1]));
  tb_qma_run #(.NQ(4), .P(8)) r4 (.clk, .rst_n, .go, .finished(fin[2]), .checks(c[2]), .failures(f[2]));
  tb_qma_run #(.NQ(6), .P(8)) r6 (.clk, .rst_n, .go, .finished(fin[3]), .checks(c[3]), .failures(f[3]));
  tb_qma_run #(.NQ(8), .P(8)) r8 (.clk, .rst_n, .go, .finished(fin[4]), .checks(c[4]), .failures(f[4]));
  tb_qma_run #(.NQ(9), .P(8)) r9 (.clk, .rst_n, .go, .finished(fin[5]), .checks(c[5]), .failures(f[5]));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) go = 1'b1;
    for (int k = 0; k < K; k++) wait (fin[k]);
    for (int k = 0; k < K; k++) begin
      checks += c[k];
      failures += f[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
