// tb_qma_param_regs: checks the gamma/beta register files. After reset all
// angles must read zero; random angles are written to every layer through
// the write port and read back through both read ports, and a write to one
// file must leave the other untouched.
module tb_qma_param_regs;
  import qma_pkg::*;
  localparam int ML = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0;
  order_e wr_sel = ORDER_COST;
  logic [2:0] wr_layer = '0, rd_layer = '0, hrd_layer = '0;
  param_t wr_data = '0, gamma, beta, hrd_gamma, hrd_beta;
  int checks = 0, failures = 0;
  int g [ML], b [ML];

  qma_param_regs #(.MAX_LAYERS(ML)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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
    for (int l = 0; l < ML; l++) begin
      rd_layer = 3'(l); hrd_layer = 3'(l); #1;
      check(gamma == 0 && beta == 0 && hrd_gamma == 0 && hrd_beta == 0, "reset value");
    end
    for (int l = 0; l < ML; l++) begin
      g[l] = int'($urandom_range(0, 65535)) - 32768;
      b[l] = int'($urandom_range(0, 65535)) - 32768;
      @(negedge clk); wr_en = 1'b1; wr_sel = ORDER_COST;  wr_layer = 3'(l); wr_data = param_t'(g[l]);
      @(negedge clk); wr_en = 1'b1; wr_sel = ORDER_MIXER; wr_layer = 3'(l); wr_data = param_t'(b[l]);
    end
    @(negedge clk); wr_en = 1'b0;
    for (int l = 0; l < ML; l++) begin
      rd_layer = 3'(l); hrd_layer = 3'(ML - 1 - l); #1;
      check(int'(gamma) == g[l] && int'(beta) == b[l], $sformatf("pipeline port layer %0d", l));
      check(int'(hrd_gamma) == g[ML-1-l] && int'(hrd_beta) == b[ML-1-l], $sformatf("host port layer %0d", ML-1-l));
    end
    // overwrite gamma[2] only
    @(negedge clk); wr_en = 1'b1; wr_sel = ORDER_COST; wr_layer = 3'd2; wr_data = 16'sd1234;
    @(negedge clk); wr_en = 1'b0; rd_layer = 3'd2; #1;
    check(gamma == 16'sd1234 && int'(beta) == b[2], "single overwrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
