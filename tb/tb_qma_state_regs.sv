// tb_qma_state_regs: checks the state registers with 3 qubits. init must
// give every component the amplitude floor(2^16 / sqrt(8)) = 23170 with a
// zero imaginary part; load without scale must copy the results; load with
// scale must divide by 2^3 rounding to nearest (ties up); values beyond the
// 24-bit state format must saturate; with neither strobe the state holds.
module tb_qma_state_regs;
  import qma_pkg::*;
  localparam int NQ = 3, N = 1 << NQ, RES_W = STATE_W + NQ + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic init = 1'b0, load = 1'b0, scale = 1'b0;
  logic signed [RES_W-1:0] result_re [N];
  logic signed [RES_W-1:0] result_im [N];
  cplx_t state [N];
  int checks = 0, failures = 0;
  longint rr [N], ri [N];

  qma_state_regs #(.NUM_QUBIT(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint sat(input longint v);
    if (v > (1 << 23) - 1) return (1 << 23) - 1;
    if (v < -(1 << 23)) return -(1 << 23);
    return v;
  endfunction

  function automatic longint div8(input longint v);
    return longint'($floor((real'(v) + 4.0) / 8.0));
  endfunction

  task automatic apply(input bit sc, input string tag);
    for (int k = 0; k < N; k++) begin
      rr[k] = longint'(int'($urandom_range(0, 1 << 27)) - (1 << 26));
      ri[k] = longint'(int'($urandom_range(0, 1 << 22)) - (1 << 21));
      if (k == 0) rr[k] = 4;   // tie: rounds up to 1
      if (k == 1) rr[k] = -4;  // tie: rounds up to 0
      result_re[k] = RES_W'(rr[k]);
      result_im[k] = RES_W'(ri[k]);
    end
    @(negedge clk); load = 1'b1; scale = sc;
    @(negedge clk); load = 1'b0; scale = 1'b0;
    for (int k = 0; k < N; k++) begin
      longint er, ei;
      er = sat(sc ? div8(rr[k]) : rr[k]);
      ei = sat(sc ? div8(ri[k]) : ri[k]);
      check(longint'(state[k].re) == er && longint'(state[k].im) == ei,
            $sformatf("%s: state[%0d] = (%0d,%0d) expected (%0d,%0d)", tag, k, state[k].re, state[k].im, er, ei));
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
    @(negedge clk); init = 1'b1;
    @(negedge clk); init = 1'b0;
    for (int k = 0; k < N; k++) check(state[k].re == 24'sd23170 && state[k].im == 0, "init to |s>");
    apply(1'b0, "load");
    apply(1'b1, "load scaled");
    repeat (3) @(negedge clk);
    for (int k = 2; k < N; k++) check(longint'(state[k].im) == sat(div8(ri[k])), "holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
