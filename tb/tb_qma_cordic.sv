// tb_qma_cordic: checks the 16-stage CORDIC. Random first-quadrant angles
// (plus 0 and pi/2) are streamed in back to back, one per clock, each with
// random side bits. Every output must come exactly 16 clocks after its
// input, with cos and sin within 1.5e-4 of the double-precision values and
// the side bits of the same angle.
module tb_qma_cordic;
  import qma_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int COUNT = 600, LAT = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_valid;
  ang_t angle = '0;
  sign_adj_t side_in = '0, side_out;
  trig_t cos_o, sin_o;
  int checks = 0, failures = 0;
  real  a_in [COUNT];
  sign_adj_t s_in [COUNT];
  int t_in [COUNT];
  int cyc = 0, n_out = 0;

  qma_cordic #(.STAGES(LAT)) dut (.*);

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      real c, s;
      c = real'(cos_o) / real'(1 << TRIG_FRAC);
      s = real'(sin_o) / real'(1 << TRIG_FRAC);
      if (n_out < COUNT) begin
        check(cyc - t_in[n_out] == LAT, $sformatf("latency %0d", cyc - t_in[n_out]));
        check(rabs(c - $cos(a_in[n_out])) < 1.5e-4 && rabs(s - $sin(a_in[n_out])) < 1.5e-4,
              $sformatf("angle %f: cos %f sin %f", a_in[n_out], c, s));
        check(side_out == s_in[n_out], "side bits follow their angle");
      end
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < COUNT; i++) begin
      int v;
      if (i == 0) v = 0;
      else if (i == 1) v = int'($rtoi(PI / 2.0 * real'(1 << ANG_FRAC)));
      else v = int'($urandom_range(0, int'($rtoi(PI / 2.0 * real'(1 << ANG_FRAC)))));
      @(negedge clk);
      angle = ang_t'(v);
      side_in = sign_adj_t'($urandom_range(0, 3));
      in_valid = (cyc % 7 != 6);      // a bubble every seventh cycle
      a_in[i] = real'(v) / real'(1 << ANG_FRAC);
      s_in[i] = side_in;
      t_in[i] = cyc;
      if (!in_valid) i--;
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
    check(n_out == COUNT, $sformatf("%0d outputs", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
