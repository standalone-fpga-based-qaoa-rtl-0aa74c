// tb_qma_normalize_rad: checks NORMALIZE_RAD against floating-point
// arithmetic. Random angles from -200 to +200 radians (and the exact
// multiples of pi/2 nearby) are fed one per clock; for each the testbench
// computes r = rad mod 2*pi in double precision, the quadrant and the folded
// angle, and expects rad_q1 within 2e-5 rad and the two sign bits, one clock
// later. Angles within 1e-5 of a quadrant boundary are not sign-checked,
// since either fold is then correct.
module tb_qma_normalize_rad;
  import qma_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_valid;
  rad_t rad = '0;
  ang_t rad_q1;
  sign_adj_t sign_adj;
  int checks = 0, failures = 0;
  int quad_seen [4] = '{0, 0, 0, 0};

  qma_normalize_rad dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input real a);
    real r, f, got, d;
    int q;
    bit near;
    @(negedge clk);
    rad = rad_t'($rtoi(a * real'(1 << RAD_FRAC)));
    a = real'(rad) / real'(1 << RAD_FRAC);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    check(out_valid, "out_valid one clock later");
    r = a - 2.0 * PI * $floor(a / (2.0 * PI));
    q = int'($floor(r / (PI / 2.0)));
    if (q > 3) q = 3;
    case (q)
      0: f = r;
      1: f = PI - r;
      2: f = r - PI;
      default: f = 2.0 * PI - r;
    endcase
    got = real'(rad_q1) / real'(1 << ANG_FRAC);
    d = got - f;
    check(d < 2.0e-5 && d > -2.0e-5, $sformatf("rad %f: rad_q1 %f expected %f", a, got, f));
    near = (r - q * PI / 2.0 < 1.0e-5) || ((q + 1) * PI / 2.0 - r < 1.0e-5);
    if (!near) begin
      check(sign_adj.neg_cos == (q == 1 || q == 2) && sign_adj.neg_sin == (q == 2 || q == 3),
            $sformatf("rad %f: signs %b%b for quadrant %0d", a, sign_adj.neg_cos, sign_adj.neg_sin, q + 1));
      quad_seen[q]++;
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) one((real'($urandom_range(0, 400000)) - 200000.0) / 1000.0);
    for (int k = -8; k <= 8; k++) begin
      one(k * PI / 2.0 + 0.001);
      one(k * PI / 2.0 - 0.001);
    end
    one(0.0);
    for (int q = 0; q < 4; q++) check(quad_seen[q] > 100, $sformatf("quadrant %0d exercised", q + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
