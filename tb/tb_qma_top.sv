// tb_qma_top: end-to-end test of the Quantum MaxCut Accelerator at its
// default size (9 qubits, up to 8 layers), driven only through its AXI4-Lite
// port the way host software would.
//
// The reference is an independent floating-point QAOA simulation: the cost
// layer multiplies each basis amplitude by exp(-i*gamma*d(k)), d(k) being
// twice the cut weight of k, and the mixer layer applies RX(2*beta) to every
// qubit one at a time, never using the Hadamard/diagonal factorisation the
// hardware relies on. The testbench checks the returned expectation value,
// the final state vector, the cycle count of each run against
// 2p*(N+22) + N + 5, and the register read-back, and it counts the design's
// mechanisms (cost and mixer operations, 2^-n rescaling, all four quadrant
// folds, rejected edges, writes refused while busy, clearing the
// Hamiltonian, a p = 0 run); any mechanism never seen is a failure.
module tb_qma_top;
  import qma_pkg::*;

  localparam int NQ = 9;          // must match the accelerator's default
  localparam int N  = 1 << NQ;
  localparam int ML = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0;
  logic [3:0]  wstrb = '1;
  logic        awready, wready, bvalid, arready, rvalid, busy, done;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;

  qma_top dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .busy, .done
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint t_start = 0, t_done = 0;
  logic done_d = 1'b0;

  // mechanism counters
  int n_cost_ops = 0, n_mix_ops = 0, n_scale = 0, n_edge_rej = 0, n_busy_rej = 0;
  int n_clear = 0, n_p0 = 0;
  int n_quad [4] = '{0, 0, 0, 0};

  always @(posedge clk) begin
    cyc <= cyc + 1;
    done_d <= done;
    if (awvalid && awready && awaddr == 8'h00 && wdata[0]) t_start = cyc;
    if (done && !done_d) t_done = cyc;
    if (dut.op_start && dut.order == ORDER_COST)  n_cost_ops++;
    if (dut.op_start && dut.order == ORDER_MIXER) n_mix_ops++;
    if (dut.state_load && dut.state_scale) n_scale++;
    if (dut.q1_valid) n_quad[{dut.q1_sign.neg_sin, dut.q1_sign.neg_cos}]++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1'b1; wvalid = 1'b1;
    #1;
    while (!awready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    resp = bresp;
    bready = 1'b1;
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    araddr = a; arvalid = 1'b1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    d = rdata; resp = rresp;
    rready = 1'b1;
    @(negedge clk);
    rready = 1'b0;
  endtask

  // ---------------- reference model ----------------
  real dref [N];                 // diagonal, 2 * cut weight
  real sre [N], sim [N];

  function automatic real fx(input int v, input int frac);
    return real'(v) / real'(longint'(1) << frac);
  endfunction

  task automatic ref_add_edge(input int i, input int j, input int w_fix);
    for (int k = 0; k < N; k++)
      if (((k >> (i-1)) & 1) != ((k >> (j-1)) & 1)) dref[k] += 2.0 * fx(w_fix, WEIGHT_FRAC);
  endtask

  task automatic ref_run(input int p, input int g_fix [ML], input int b_fix [ML], output real f);
    for (int k = 0; k < N; k++) begin
      sre[k] = 1.0 / $sqrt(real'(N));
      sim[k] = 0.0;
    end
    for (int l = 0; l < p; l++) begin
      real g, b, c, s;
      g = fx(g_fix[l], PARAM_FRAC);
      b = fx(b_fix[l], PARAM_FRAC);
      for (int k = 0; k < N; k++) begin
        real a, r0, i0;
        a = -g * dref[k];
        r0 = sre[k]; i0 = sim[k];
        sre[k] = r0 * $cos(a) - i0 * $sin(a);
        sim[k] = r0 * $sin(a) + i0 * $cos(a);
      end
      c = $cos(b); s = $sin(b);
      for (int q = 0; q < NQ; q++) begin
        for (int k = 0; k < N; k++) begin
          if (((k >> q) & 1) == 0) begin
            int k1;
            real ar, ai, br, bi;
            k1 = k | (1 << q);
            ar = sre[k]; ai = sim[k]; br = sre[k1]; bi = sim[k1];
            // [c, -i s; -i s, c]
            sre[k]  = c * ar + s * bi;
            sim[k]  = c * ai - s * br;
            sre[k1] = c * br + s * ai;
            sim[k1] = c * bi - s * ar;
          end
        end
      end
    end
    f = 0.0;
    for (int k = 0; k < N; k++) f += (sre[k] * sre[k] + sim[k] * sim[k]) * dref[k] / 2.0;
  endtask

  // ---------------- test sequence ----------------
  int gam [ML], bet [ML];

  task automatic do_run(input int p, input string tag);
    logic [31:0] d;
    logic [1:0]  r;
    real fref, fhw, maxerr;
    longint expect_cyc;
    axi_write(8'h08, 32'(p), r);
    check(r == 2'b00, {tag, ": NUM_LAYERS write"});
    for (int l = 0; l < ML; l++) begin
      axi_write(8'h0C, 32'(l), r);
      axi_write(8'h10, 32'(gam[l]), r);
      check(r == 2'b00, {tag, ": GAMMA write"});
      axi_write(8'h14, 32'(bet[l]), r);
      check(r == 2'b00, {tag, ": BETA write"});
    end
    axi_write(8'h0C, 32'd3, r);
    axi_read(8'h10, d, r);
    check($signed(d) == gam[3], {tag, ": GAMMA read-back"});
    axi_read(8'h14, d, r);
    check($signed(d) == bet[3], {tag, ": BETA read-back"});
    axi_write(8'h00, 32'h1, r);
    check(r == 2'b00, {tag, ": start"});
    // a configuration write during the run must be refused
    axi_write(8'h10, 32'h7FF, r);
    check(r == 2'b10, {tag, ": write while busy refused"});
    if (r == 2'b10) n_busy_rej++;
    axi_read(8'h04, d, r);
    check(d[0] == 1'b1, {tag, ": STATUS.busy during run"});
    do axi_read(8'h04, d, r); while (d[1] == 1'b0);
    check(d[0] == 1'b0, {tag, ": STATUS.busy cleared at done"});
    expect_cyc = 2 * p * (N + 22) + N + 5;
    check(t_done - t_start - 1 == expect_cyc, $sformatf("%s: run took %0d cycles, expected %0d",
          tag, t_done - t_start - 1, expect_cyc));
    axi_read(8'h1C, d, r);
    fhw = fx($signed(d), EXP_FRAC);
    // restore gamma[3] after the refused write (the refused value must not have landed)
    axi_read(8'h10, d, r);
    check($signed(d) == gam[3], {tag, ": refused write had no effect"});
    ref_run(p, gam, bet, fref);
    check((fhw - fref) < 0.005 + 0.001 * fref && (fref - fhw) < 0.005 + 0.001 * fref,
          $sformatf("%s: expectation hw=%f ref=%f", tag, fhw, fref));
    $display("%s: p=%0d expectation hw=%f ref=%f cycles=%0d", tag, p, fhw, fref, t_done - t_start - 1);
    maxerr = 0.0;
    for (int k = 0; k < N; k++) begin
      real er, ei;
      er = fx(int'(dut.u_state.state[k].re), STATE_FRAC) - sre[k];
      ei = fx(int'(dut.u_state.state[k].im), STATE_FRAC) - sim[k];
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > maxerr) maxerr = er;
      if (ei > maxerr) maxerr = ei;
    end
    check(maxerr < 2.0e-3, $sformatf("%s: max amplitude error %g", tag, maxerr));
    $display("%s: max amplitude error %g", tag, maxerr);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [31:0] d;
    logic [1:0]  r;
    int ei [16], ej [16], ew [16];
    for (int k = 0; k < N; k++) dref[k] = 0.0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    axi_read(8'h20, d, r);
    check(d[7:0] == 8'(NQ) && d[15:8] == 8'(ML), "INFO register");
    axi_read(8'h40, d, r);
    check(r == 2'b10, "unmapped read answered with SLVERR");

    // A weighted graph on 9 vertices: a ring plus chords, random Q8.8 weights.
    for (int e = 0; e < 16; e++) begin
      if (e < 9) begin ei[e] = e + 1; ej[e] = (e + 1) % 9 + 1; end
      else begin ei[e] = (e * 5) % 9 + 1; ej[e] = (e * 7 + 3) % 9 + 1; end
      ew[e] = 64 + int'($urandom_range(0, 447));   // 0.25 .. 2.0
      axi_write(8'h18, {16'(ew[e]), 8'(ej[e]), 8'(ei[e])}, r);
      if (ei[e] != ej[e]) begin
        check(r == 2'b00, "edge accepted");
        ref_add_edge(ei[e], ej[e], ew[e]);
      end else begin
        check(r == 2'b10, "edge with i == j refused");
        n_edge_rej++;
      end
    end
    axi_write(8'h18, {16'd256, 8'd10, 8'd1}, r);      // vertex 10 does not exist
    check(r == 2'b10, "edge with vertex > NUM_QUBIT refused");
    if (r == 2'b10) n_edge_rej++;
    for (int k = 0; k < N; k++)
      check(fx(int'(dut.u_ham.diag_q[k]), COST_FRAC) == dref[k], $sformatf("cost_hamil_diag[%0d]", k));

    // Run 1: full depth p = 8 with random angles in [-2, 2) radians.
    for (int l = 0; l < ML; l++) begin
      gam[l] = int'($urandom_range(0, 16383)) - 8192;
      bet[l] = int'($urandom_range(0, 16383)) - 8192;
    end
    do_run(ML, "run p=8");

    // Run 2: p = 0 measures the uniform start state: mean cut weight.
    do_run(0, "run p=0");
    n_p0++;

    // Run 3: new graph after clearing, p = 2.
    axi_write(8'h00, 32'h2, r);
    check(r == 2'b00, "clear Hamiltonian");
    n_clear++;
    for (int k = 0; k < N; k++) dref[k] = 0.0;
    check(dut.u_ham.diag_q[5] == '0 && dut.u_ham.diag_q[N-1] == '0, "diagonal cleared");
    for (int e = 0; e < 5; e++) begin
      axi_write(8'h18, {16'(128 + 32 * e), 8'(e + 2), 8'(1)}, r);   // star around vertex 1
      ref_add_edge(1, e + 2, 128 + 32 * e);
    end
    for (int l = 0; l < ML; l++) begin
      gam[l] = int'($urandom_range(0, 8191)) - 4096;
      bet[l] = int'($urandom_range(0, 8191)) - 4096;
    end
    do_run(2, "run p=2");

    check(n_cost_ops == 10 && n_mix_ops == 10, $sformatf("operations: %0d cost, %0d mixer", n_cost_ops, n_mix_ops));
    check(n_scale == 10, "2^-n rescaling once per layer");
    for (int q = 0; q < 4; q++) check(n_quad[q] > 0, $sformatf("quadrant fold %0d seen %0d times", q, n_quad[q]));
    check(n_edge_rej > 0, "rejected edge seen");
    check(n_busy_rej > 0, "busy refusal seen");
    check(n_clear > 0 && n_p0 > 0, "clear and p=0 seen");
    $display("mechanisms: cost_ops=%0d mixer_ops=%0d rescale=%0d quad=%0d/%0d/%0d/%0d edge_rej=%0d busy_rej=%0d clear=%0d p0=%0d",
             n_cost_ops, n_mix_ops, n_scale, n_quad[0], n_quad[1], n_quad[2], n_quad[3],
             n_edge_rej, n_busy_rej, n_clear, n_p0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
