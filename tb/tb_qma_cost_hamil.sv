// tb_qma_cost_hamil: checks the cost-Hamiltonian builder with 5 qubits.
// Random edges are written; the expected diagonal is built independently by
// looping over the basis states in integer arithmetic. Edges with a vertex
// of 0, above NUM_QUBIT, or i == j must be refused (edge_ok low) and change
// nothing; clear must zero every entry.
module tb_qma_cost_hamil;
  import qma_pkg::*;
  localparam int NQ = 5, N = 1 << NQ;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, edge_valid = 1'b0, edge_ok;
  logic [7:0] edge_i = '0, edge_j = '0;
  weight_t edge_w = '0;
  logic [NQ-1:0] rd_idx1 = '0, rd_idx2 = '0;
  cost_t rd_data1, rd_data2;
  int checks = 0, failures = 0;
  int model [N];

  qma_cost_hamil #(.NUM_QUBIT(NQ)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare_all(input string tag);
    for (int k = 0; k < N; k++) begin
      rd_idx1 = NQ'(k); rd_idx2 = NQ'(N - 1 - k); #1;
      check(int'(rd_data1) == model[k], $sformatf("%s: diag[%0d]=%0d expected %0d", tag, k, rd_data1, model[k]));
      check(int'(rd_data2) == model[N-1-k], $sformatf("%s: port 2 diag[%0d]", tag, N-1-k));
    end
  endtask

  task automatic put_edge(input int i, input int j, input int w, input bit valid);
    @(negedge clk);
    edge_i = 8'(i); edge_j = 8'(j); edge_w = weight_t'(w); edge_valid = 1'b1; #1;
    check(edge_ok == valid, $sformatf("edge_ok for (%0d,%0d)", i, j));
    @(negedge clk); edge_valid = 1'b0;
    if (valid)
      for (int k = 0; k < N; k++)
        if (((k >> (i-1)) & 1) != ((k >> (j-1)) & 1)) model[k] += 2 * w;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) model[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare_all("reset");
    for (int e = 0; e < 12; e++) begin
      int i, j;
      i = int'($urandom_range(1, NQ));
      do j = int'($urandom_range(1, NQ)); while (j == i);
      put_edge(i, j, int'($urandom_range(0, 2000)) - 500, 1'b1);
    end
    compare_all("after edges");
    put_edge(0, 2, 100, 1'b0);
    put_edge(3, 3, 100, 1'b0);
    put_edge(1, NQ + 1, 100, 1'b0);
    compare_all("after refused edges");
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    for (int k = 0; k < N; k++) model[k] = 0;
    compare_all("after clear");
    put_edge(NQ, 1, 256, 1'b1);
    compare_all("after one edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
