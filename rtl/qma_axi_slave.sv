// qma_axi_slave: AXI4-Lite slave through which the host drives the
// accelerator. It maps the four commands of the host API onto registers
// (32-bit data, byte addresses, word aligned):
//
//   0x00 CTRL        W   bit0: activate_maxcut (start a run)
//                        bit1: clear the cost Hamiltonian diagonal
//   0x04 STATUS      R   bit0: busy, bit1: done (set at the end of a run,
//                        cleared by the next start)
//   0x08 NUM_LAYERS  RW  circuit depth p (0 .. MAX_LAYERS)
//   0x0C LAYER_SEL   RW  layer index used by GAMMA and BETA
//   0x10 GAMMA       RW  set_parameter: gamma[LAYER_SEL], Q4.12 radians
//   0x14 BETA        RW  set_parameter: beta[LAYER_SEL],  Q4.12 radians
//   0x18 EDGE        W   set_cost_hamiltonian: [7:0] vertex i, [15:8] vertex
//                        j (both 1-based), [31:16] weight, Q8.8 signed
//   0x1C EXPECT      R   get_expectation: result of the last run, Q16.16
//   0x20 INFO        R   [7:0] NUM_QUBIT, [15:8] MAX_LAYERS
//
// A write and its address are taken together in one clock when both
// AWVALID and WVALID are high and no write response is pending; the response
// follows on the next clock. Reads are answered one clock after the address
// is taken. A write to a configuration register while a run is busy, an
// edge with invalid vertices, and any unmapped address are answered with
// SLVERR and have no effect. WSTRB is ignored: every write is a full word.
// That the accelerator is an AXI IP core programmed through these four
// commands follows the design description; the register map, the
// handshake timing and the error policy are this implementation's choices.
// The two low address bits and WSTRB are not used. rst_n also disables the
// handshake assertions, so a linter may see it as both an asynchronous and a
// synchronous net; in the circuit it is only the asynchronous reset.
module qma_axi_slave
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT  = 9,
  parameter int MAX_LAYERS = 8,
  localparam int LW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite write address / data / response
  input  logic [7:0]    s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  // AXI4-Lite read address / data
  input  logic [7:0]    s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // to the accelerator core
  output logic          start,
  output logic          ham_clear,
  output logic [LW:0]   num_layers,
  output logic          param_wr,
  output order_e        param_sel,
  output logic [LW-1:0] layer_sel,
  output param_t        param_data,
  output logic          edge_valid,
  output logic [7:0]    edge_i,
  output logic [7:0]    edge_j,
  output weight_t       edge_w,
  input  logic          edge_ok,
  input  param_t        rd_gamma,
  input  param_t        rd_beta,
  input  logic          busy,
  input  logic          done,
  input  exp_t          expectation
);

  localparam logic [7:0] A_CTRL   = 8'h00;
  localparam logic [7:0] A_STATUS = 8'h04;
  localparam logic [7:0] A_LAYERS = 8'h08;
  localparam logic [7:0] A_LSEL   = 8'h0C;
  localparam logic [7:0] A_GAMMA  = 8'h10;
  localparam logic [7:0] A_BETA   = 8'h14;
  localparam logic [7:0] A_EDGE   = 8'h18;
  localparam logic [7:0] A_EXPECT = 8'h1C;
  localparam logic [7:0] A_INFO   = 8'h20;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  logic       wr_fire, rd_fire;
  logic       wr_err;
  logic [7:0] waddr;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;
  assign waddr     = {s_awaddr[7:2], 2'b00};

  // Decode of the write in flight and the strobes it raises.
  assign edge_i     = s_wdata[7:0];
  assign edge_j     = s_wdata[15:8];
  assign edge_w     = weight_t'(s_wdata[31:16]);
  assign param_data = param_t'(s_wdata[PARAM_W-1:0]);
  assign param_sel  = (waddr == A_BETA) ? ORDER_MIXER : ORDER_COST;

  always_comb begin
    wr_err = 1'b0;
    unique case (waddr)
      A_CTRL, A_LAYERS, A_LSEL, A_GAMMA, A_BETA: wr_err = busy;
      A_EDGE:  wr_err = busy || !edge_ok;
      default: wr_err = 1'b1;
    endcase
  end

  assign start      = wr_fire && !wr_err && (waddr == A_CTRL) && s_wdata[0];
  assign ham_clear  = wr_fire && !wr_err && (waddr == A_CTRL) && s_wdata[1];
  assign param_wr   = wr_fire && !wr_err && ((waddr == A_GAMMA) || (waddr == A_BETA));
  assign edge_valid = wr_fire && !wr_err && (waddr == A_EDGE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid   <= 1'b0;
      s_bresp    <= RESP_OKAY;
      num_layers <= '0;
      layer_sel  <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= wr_err ? RESP_SLVERR : RESP_OKAY;
        if (!wr_err) begin
          if (waddr == A_LAYERS) num_layers <= (LW+1)'(s_wdata);
          if (waddr == A_LSEL)   layer_sel  <= LW'(s_wdata);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= RESP_OKAY;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        s_rresp  <= RESP_OKAY;
        unique case ({s_araddr[7:2], 2'b00})
          A_STATUS: s_rdata <= {30'd0, done, busy};
          A_LAYERS: s_rdata <= 32'(num_layers);
          A_LSEL:   s_rdata <= 32'(layer_sel);
          A_GAMMA:  s_rdata <= 32'(signed'(rd_gamma));
          A_BETA:   s_rdata <= 32'(signed'(rd_beta));
          A_EXPECT: s_rdata <= 32'(expectation);
          A_INFO:   s_rdata <= {16'd0, 8'(MAX_LAYERS), 8'(NUM_QUBIT)};
          default: begin
            s_rdata <= '0;
            s_rresp <= RESP_SLVERR;
          end
        endcase
      end
    end
  end

  // Handshake rules of AXI4-Lite: a response, once valid, holds until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata) && $stable(s_rresp));

endmodule
