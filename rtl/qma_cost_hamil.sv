// qma_cost_hamil: builds and stores the diagonal of the Weighted-MaxCut cost
// Hamiltonian, cost_hamil_diag[0 .. NUM_STATE-1].
//
// Each set_cost_hamiltonian command delivers one edge (i, j, weight) with
// 1-based vertex numbers. For every basis state k whose bits i-1 and j-1
// differ, 2*weight is added to cost_hamil_diag[k], exactly the update rule of
// the design description. This implementation applies the rule to all
// NUM_STATE entries in parallel, so one edge is absorbed in a single clock
// (edge_valid high for one cycle). An edge whose vertices are out of range or
// equal is ignored and flagged by edge_ok=0 (combinational). clear zeroes the
// whole diagonal; so does reset. Sums wrap in COST_W bits, which holds any
// graph on 9 vertices with Q8.8 weights below 128.
//
// Two combinational read ports serve the CALCULATE_RAD stage (rd_idx1) and
// the expectation unit (rd_idx2).
module qma_cost_hamil
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT = 9,
  localparam int NUM_STATE = 1 << NUM_QUBIT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 edge_valid,
  input  logic [7:0]           edge_i,     // 1-based vertex index
  input  logic [7:0]           edge_j,     // 1-based vertex index
  input  weight_t              edge_w,
  output logic                 edge_ok,
  input  logic [NUM_QUBIT-1:0] rd_idx1,
  output cost_t                rd_data1,
  input  logic [NUM_QUBIT-1:0] rd_idx2,
  output cost_t                rd_data2
);

  localparam int VW = (NUM_QUBIT > 1) ? $clog2(NUM_QUBIT) : 1;

  cost_t         diag_q [NUM_STATE];
  cost_t         two_w;
  logic [VW-1:0] bi, bj;      // 0-based bit positions of the two vertices

  assign edge_ok = (edge_i != 8'd0) && (edge_j != 8'd0) &&
                   (int'(edge_i) <= NUM_QUBIT) && (int'(edge_j) <= NUM_QUBIT) &&
                   (edge_i != edge_j);
  assign two_w   = cost_t'(edge_w) <<< 1;
  assign bi      = VW'(edge_i - 8'd1);
  assign bj      = VW'(edge_j - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_STATE; k++) diag_q[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < NUM_STATE; k++) diag_q[k] <= '0;
    end else if (edge_valid && edge_ok) begin
      for (int k = 0; k < NUM_STATE; k++) begin
        logic [NUM_QUBIT-1:0] kv;
        kv = NUM_QUBIT'(k);
        if (kv[bi] != kv[bj])
          diag_q[k] <= diag_q[k] + two_w;
      end
    end
  end

  assign rd_data1 = diag_q[rd_idx1];
  assign rd_data2 = diag_q[rd_idx2];

endmodule
