// tb_qma_axi_slave: checks the AXI4-Lite register interface on its own,
// with the accelerator core replaced by testbench signals. It writes each
// register and checks the strobe and data the write raises (start,
// ham_clear, param_wr with the right gamma/beta select and layer, edge with
// vertices and weight), the OKAY/SLVERR responses (unmapped address, invalid
// edge, configuration write while busy) and every readable register. Valid
// signals are held for random extra cycles before ready is given on the
// response channels, to exercise the hold rules.
module tb_qma_axi_slave;
  import qma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [7:0]  s_awaddr = '0, s_araddr = '0;
  logic        s_awvalid = 1'b0, s_wvalid = 1'b0, s_bready = 1'b0, s_arvalid = 1'b0, s_rready = 1'b0;
  logic [31:0] s_wdata = '0;
  logic [3:0]  s_wstrb = '1;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic        start, ham_clear, param_wr, edge_valid;
  logic [3:0]  num_layers;
  order_e      param_sel;
  logic [2:0]  layer_sel;
  param_t      param_data;
  logic [7:0]  edge_i, edge_j;
  weight_t     edge_w;
  logic        edge_ok = 1'b1, busy = 1'b0, done = 1'b0;
  param_t      rd_gamma = 16'sd111, rd_beta = -16'sd222;
  exp_t        expectation = 32'h0012_3456;
  int checks = 0, failures = 0;

  qma_axi_slave #(.NUM_QUBIT(9), .MAX_LAYERS(8)) dut (.*);

  // capture of the strobes raised by the last write
  int n_start, n_clear, n_param, n_edge;
  order_e last_sel; logic [2:0] last_layer; param_t last_data;
  logic [7:0] last_i, last_j; weight_t last_w;
  always @(posedge clk) begin
    if (start) n_start++;
    if (ham_clear) n_clear++;
    if (param_wr) begin n_param++; last_sel = param_sel; last_layer = layer_sel; last_data = param_data; end
    if (edge_valid) begin n_edge++; last_i = edge_i; last_j = edge_j; last_w = edge_w; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1'b1; s_wvalid = 1'b1;
    #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    s_awvalid = 1'b0; s_wvalid = 1'b0;
    while (!s_bvalid) @(negedge clk);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    resp = s_bresp;
    s_bready = 1'b1;
    @(negedge clk);
    s_bready = 1'b0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1'b1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    s_arvalid = 1'b0;
    while (!s_rvalid) @(negedge clk);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    d = s_rdata; resp = s_rresp;
    s_rready = 1'b1;
    @(negedge clk);
    s_rready = 1'b0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [1:0] r;
    n_start = 0; n_clear = 0; n_param = 0; n_edge = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rd(8'h20, d, r);
    check(r == 2'b00 && d == 32'h0000_0809, "INFO");
    wr(8'h08, 32'd5, r);
    check(r == 2'b00 && num_layers == 4'd5, "NUM_LAYERS write");
    rd(8'h08, d, r);
    check(d == 32'd5, "NUM_LAYERS read");
    wr(8'h0C, 32'd6, r);
    check(r == 2'b00 && layer_sel == 3'd6, "LAYER_SEL write");
    wr(8'h10, 32'h0000_F123, r);
    check(r == 2'b00 && n_param == 1 && last_sel == ORDER_COST && last_layer == 3'd6 && last_data == 16'shF123, "GAMMA write");
    wr(8'h14, 32'h0000_0456, r);
    check(r == 2'b00 && n_param == 2 && last_sel == ORDER_MIXER && last_data == 16'sh0456, "BETA write");
    rd(8'h10, d, r);
    check(d == 32'd111, "GAMMA read");
    rd(8'h14, d, r);
    check(d == 32'hFFFF_FF22, "BETA read (sign-extended)");
    wr(8'h18, {16'hFF80, 8'd7, 8'd2}, r);
    check(r == 2'b00 && n_edge == 1 && last_i == 8'd2 && last_j == 8'd7 && last_w == -16'sd128, "EDGE write");
    edge_ok = 1'b0;
    wr(8'h18, {16'h0100, 8'd3, 8'd3}, r);
    check(r == 2'b10 && n_edge == 1, "invalid EDGE refused");
    edge_ok = 1'b1;
    wr(8'h00, 32'h2, r);
    check(r == 2'b00 && n_clear == 1 && n_start == 0, "CTRL clear");
    wr(8'h00, 32'h1, r);
    check(r == 2'b00 && n_start == 1 && n_clear == 1, "CTRL start");
    busy = 1'b1;
    wr(8'h10, 32'h1, r);
    check(r == 2'b10 && n_param == 2, "GAMMA refused while busy");
    wr(8'h00, 32'h1, r);
    check(r == 2'b10 && n_start == 1, "start refused while busy");
    wr(8'h18, {16'h0100, 8'd3, 8'd1}, r);
    check(r == 2'b10 && n_edge == 1, "EDGE refused while busy");
    rd(8'h04, d, r);
    check(d == 32'h1, "STATUS busy");
    busy = 1'b0; done = 1'b1;
    rd(8'h04, d, r);
    check(d == 32'h2, "STATUS done");
    rd(8'h1C, d, r);
    check(r == 2'b00 && d == 32'h0012_3456, "EXPECT");
    wr(8'h30, 32'h1, r);
    check(r == 2'b10, "unmapped write refused");
    rd(8'h30, d, r);
    check(r == 2'b10, "unmapped read refused");
    rd(8'h00, d, r);
    check(r == 2'b10, "CTRL is write-only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
