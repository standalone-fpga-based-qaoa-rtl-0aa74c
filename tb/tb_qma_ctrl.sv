// tb_qma_ctrl: checks the run sequencer against simple models of the
// pipeline (op_done rises a fixed number of clocks after op_start and stays
// high until the next op_start) and of the expectation unit (exp_done pulses
// a few clocks after exp_start). For p = 3, 0 and an over-range 12 (clamped
// to MAX_LAYERS = 8) it records every op_start with its order and layer and
// expects cost, mixer, cost, mixer ... with layer 0, 0, 1, 1, ...; one
// state_init before the first operation; one state_load per operation with
// state_scale exactly on the mixer loads; one exp_start after the last load;
// busy for the whole run and a sticky done at its end.
module tb_qma_ctrl;
  import qma_pkg::*;
  localparam int ML = 8, OPLAT = 5, EXPLAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, op_done = 1'b0, exp_done = 1'b0;
  logic [3:0] num_layers = '0;
  logic busy, done, op_start, state_init, state_load, state_scale, exp_start;
  order_e order;
  logic [2:0] layer;
  int checks = 0, failures = 0;

  qma_ctrl #(.MAX_LAYERS(ML)) dut (.*);

  int n_ops, n_init, n_load, n_scale, n_exp, op_timer, exp_timer;
  bit seq_ok, init_first, exp_after;

  always @(posedge clk) begin
    if (op_start) begin
      seq_ok = seq_ok && (order == ((n_ops % 2 == 0) ? ORDER_COST : ORDER_MIXER)) && (int'(layer) == n_ops / 2);
      init_first = init_first && (n_init == 1);
      n_ops++;
      op_done <= 1'b0;
      op_timer = OPLAT;
    end else if (op_timer > 0) begin
      op_timer--;
      if (op_timer == 0) op_done <= 1'b1;
    end
    if (state_init) n_init++;
    if (state_load) begin
      n_load++;
      if (state_scale) n_scale++;
      seq_ok = seq_ok && (state_scale == (order == ORDER_MIXER));
    end
    exp_done <= 1'b0;
    if (exp_start) begin
      n_exp++;
      exp_after = (n_load == n_ops);
      exp_timer = EXPLAT;
    end else if (exp_timer > 0) begin
      exp_timer--;
      if (exp_timer == 0) exp_done <= 1'b1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int p);
    int pe, cyc;
    pe = (p > ML) ? ML : p;
    n_ops = 0; n_init = 0; n_load = 0; n_scale = 0; n_exp = 0;
    seq_ok = 1; init_first = 1; exp_after = 0; op_timer = 0; exp_timer = 0;
    @(negedge clk); num_layers = 4'(p); start = 1'b1;
    @(negedge clk); start = 1'b0;
    check(busy && !done, $sformatf("p=%0d: busy after start", p));
    cyc = 0;
    while (!done && cyc < 2000) begin @(negedge clk); cyc++; check(done || busy, "busy until done"); end
    check(done && !busy, $sformatf("p=%0d: finished", p));
    check(n_ops == 2 * pe, $sformatf("p=%0d: %0d operations", p, n_ops));
    check(seq_ok, $sformatf("p=%0d: order/layer sequence and scaling", p));
    check(n_init == 1 && (pe == 0 || init_first), $sformatf("p=%0d: one init before the operations", p));
    check(n_load == 2 * pe && n_scale == pe, $sformatf("p=%0d: %0d loads, %0d scaled", p, n_load, n_scale));
    check(n_exp == 1 && exp_after, $sformatf("p=%0d: expectation after the last load", p));
    repeat (3) @(negedge clk);
    check(done, "done is sticky");
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(3);
    run(0);
    run(12);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
