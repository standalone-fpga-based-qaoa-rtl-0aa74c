// qma_param_regs: the gamma[layer] and beta[layer] register files of the
// CALCULATE_RAD stage.
//
// The host's set_parameter command stores one variational angle per write:
// wr_sel chooses gamma (cost ansatz) or beta (mixer ansatz), wr_layer the
// layer index. The pipeline reads the pair of the layer it is working on
// through rd_layer; a second read port (hrd_layer) lets the host read back
// what it wrote. Both read ports are combinational; writes take effect at the
// next clock edge. Reset clears every angle to zero.
//
// That there are two register files indexed by layer follows the design
// description; the depth MAX_LAYERS (8, the deepest circuit evaluated) and
// the host read-back port are this implementation's choices.
module qma_param_regs
  import qma_pkg::*;
#(
  parameter int MAX_LAYERS = 8,
  localparam int LW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  order_e        wr_sel,     // ORDER_COST: gamma, ORDER_MIXER: beta
  input  logic [LW-1:0] wr_layer,
  input  param_t        wr_data,
  input  logic [LW-1:0] rd_layer,
  output param_t        gamma,
  output param_t        beta,
  input  logic [LW-1:0] hrd_layer,
  output param_t        hrd_gamma,
  output param_t        hrd_beta
);

  param_t gamma_q [MAX_LAYERS];
  param_t beta_q  [MAX_LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < MAX_LAYERS; l++) begin
        gamma_q[l] <= '0;
        beta_q[l]  <= '0;
      end
    end else if (wr_en && (int'(wr_layer) < MAX_LAYERS)) begin
      if (wr_sel == ORDER_COST) gamma_q[wr_layer] <= wr_data;
      else                      beta_q[wr_layer]  <= wr_data;
    end
  end

  always_comb begin
    gamma     = '0;
    beta      = '0;
    hrd_gamma = '0;
    hrd_beta  = '0;
    if (int'(rd_layer) < MAX_LAYERS) begin
      gamma = gamma_q[rd_layer];
      beta  = beta_q[rd_layer];
    end
    if (int'(hrd_layer) < MAX_LAYERS) begin
      hrd_gamma = gamma_q[hrd_layer];
      hrd_beta  = beta_q[hrd_layer];
    end
  end

endmodule
