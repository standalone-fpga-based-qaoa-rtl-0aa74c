// tb_qma_run: testbench helper that owns one accelerator instance of
// NUM_QUBIT = NQ and, when go rises, runs one QAOA job on it through the
// AXI4-Lite port: a random weighted graph on all NQ vertices (each vertex
// pair is an edge with probability 0.6, weights 0.25 .. 2.0), p = P layers
// with random angles, start, wait for done. It then compares the returned
// expectation value and the final state vector with an independent
// floating-point QAOA simulation (cost phases exp(-i*gamma*d(k)), mixer as
// one RX(2*beta) per qubit) and the run time with 2p(N+22)+N+5 clocks, and
// reports the number of checks and failures on its outputs.
module tb_qma_run #(
  parameter int NQ = 3,
  parameter int P  = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  import qma_pkg::*;
  localparam int N = 1 << NQ;

  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0;
  logic        awready, wready, bvalid, arready, rvalid, busy, done;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;

  qma_top #(.NUM_QUBIT(NQ), .MAX_LAYERS(8)) dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(4'hF), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .busy, .done
  );

  longint cyc = 0, t_start = 0, t_done = 0;
  logic done_d = 1'b0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    done_d <= done;
    if (awvalid && awready && awaddr == 8'h00 && wdata[0]) t_start = cyc;
    if (done && !done_d) t_done = cyc;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (n=%0d): %s", NQ, what); end
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

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    rready = 1'b1;
    @(negedge clk);
    rready = 1'b0;
  endtask

  real dref [N];
  real sre [N], sim [N];
  int  gam [8], bet [8];

  initial begin
    logic [31:0] d;
    logic [1:0]  r;
    real f, fhw, maxerr, best;
    longint expect_cyc;
    finished = 1'b0;
    checks = 0;
    failures = 0;
    for (int k = 0; k < N; k++) dref[k] = 0.0;
    wait (go);
    for (int i = 1; i <= NQ; i++)
      for (int j = i + 1; j <= NQ; j++)
        if ($urandom_range(0, 9) < 6 || j == i + 1) begin
          int w;
          w = 64 + int'($urandom_range(0, 448));
          axi_write(8'h18, {16'(w), 8'(j), 8'(i)}, r);
          check(r == 2'b00, "edge accepted");
          for (int k = 0; k < N; k++)
            if (((k >> (i-1)) & 1) != ((k >> (j-1)) & 1)) dref[k] += 2.0 * real'(w) / 256.0;
        end
    axi_write(8'h08, 32'(P), r);
    for (int l = 0; l < P; l++) begin
      gam[l] = int'($urandom_range(0, 8191)) - 4096;
      bet[l] = int'($urandom_range(0, 8191)) - 4096;
      axi_write(8'h0C, 32'(l), r);
      axi_write(8'h10, 32'(gam[l]), r);
      axi_write(8'h14, 32'(bet[l]), r);
    end
    axi_write(8'h00, 32'h1, r);
    do axi_read(8'h04, d); while (d[1] == 1'b0);
    axi_read(8'h1C, d);
    fhw = real'($signed(d)) / 65536.0;
    expect_cyc = 2 * P * (N + 22) + N + 5;
    check(t_done - t_start - 1 == expect_cyc,
          $sformatf("run took %0d cycles, expected %0d", t_done - t_start - 1, expect_cyc));

    // reference QAOA
    for (int k = 0; k < N; k++) begin sre[k] = 1.0 / $sqrt(real'(N)); sim[k] = 0.0; end
    for (int l = 0; l < P; l++) begin
      real g, b, c, s;
      g = real'(gam[l]) / 4096.0;
      b = real'(bet[l]) / 4096.0;
      for (int k = 0; k < N; k++) begin
        real a, r0, i0;
        a = -g * dref[k]; r0 = sre[k]; i0 = sim[k];
        sre[k] = r0 * $cos(a) - i0 * $sin(a);
        sim[k] = r0 * $sin(a) + i0 * $cos(a);
      end
      c = $cos(b); s = $sin(b);
      for (int q = 0; q < NQ; q++)
        for (int k = 0; k < N; k++)
          if (((k >> q) & 1) == 0) begin
            int k1;
            real ar, ai, br, bi;
            k1 = k | (1 << q);
            ar = sre[k]; ai = sim[k]; br = sre[k1]; bi = sim[k1];
            sre[k]  = c * ar + s * bi;  sim[k]  = c * ai - s * br;
            sre[k1] = c * br + s * ai;  sim[k1] = c * bi - s * ar;
          end
    end
    f = 0.0; best = 0.0;
    for (int k = 0; k < N; k++) begin
      f += (sre[k] * sre[k] + sim[k] * sim[k]) * dref[k] / 2.0;
      if (dref[k] / 2.0 > best) best = dref[k] / 2.0;
    end
    check(fhw - f < 0.005 + 0.001 * f && f - fhw < 0.005 + 0.001 * f,
          $sformatf("expectation hw=%f ref=%f", fhw, f));
    maxerr = 0.0;
    for (int k = 0; k < N; k++) begin
      real er, ei;
      er = real'(dut.u_state.state[k].re) / 65536.0 - sre[k];
      ei = real'(dut.u_state.state[k].im) / 65536.0 - sim[k];
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > maxerr) maxerr = er;
      if (ei > maxerr) maxerr = ei;
    end
    check(maxerr < 2.0e-3, $sformatf("max amplitude error %g", maxerr));
    $display("n=%0d p=%0d: expectation hw=%f ref=%f (max cut %f), %0d cycles, max amplitude error %g",
             NQ, P, fhw, f, best, t_done - t_start - 1, maxerr);
    finished = 1'b1;
  end
endmodule
