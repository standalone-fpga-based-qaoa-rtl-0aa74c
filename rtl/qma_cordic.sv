// qma_cordic: the CORDIC stage, a fully pipelined rotation-mode CORDIC that
// returns cos and sin of a first-quadrant angle.
//
// One angle enters per clock (in_valid, angle in radians with ANG_FRAC
// fraction bits, 0 .. pi/2). Stage i (i = 0 .. STAGES-1) performs one
// micro-rotation by +-atan(2^-i), steered by the sign of the residual angle,
// and registers x, y, z. The start vector is (K, 0) with K the CORDIC gain
// correction for 16 iterations, so the last stage holds cos and sin directly
// (TRIG_FRAC fraction bits) after exactly STAGES clocks. The sign-adjustment
// bits of the angle (side_in) are shifted through a delay line of the same
// length so that they leave together with their cos/sin, as the design
// description requires. The 16-stage depth follows the design description;
// the rotation-mode algorithm, word widths and the atan table are this
// implementation's. atan table: ATAN[i] = round(atan(2^-i) * 2^18).
module qma_cordic
  import qma_pkg::*;
#(
  parameter int STAGES = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  ang_t      angle,
  input  sign_adj_t side_in,
  output logic      out_valid,
  output trig_t     cos_o,
  output trig_t     sin_o,
  output sign_adj_t side_out
);

  localparam int XY_W = 20;
  // round(0.6072529351 * 2^16), gain correction of a 16-iteration CORDIC
  localparam logic signed [XY_W-1:0] K_INIT = 20'sd39797;

  function automatic ang_t atan_tab(input int i);
    case (i)
      0: return ang_t'(205887);  1: return ang_t'(121542);
      2: return ang_t'(64220);   3: return ang_t'(32599);
      4: return ang_t'(16363);   5: return ang_t'(8189);
      6: return ang_t'(4096);    7: return ang_t'(2048);
      8: return ang_t'(1024);    9: return ang_t'(512);
      10: return ang_t'(256);    11: return ang_t'(128);
      12: return ang_t'(64);     13: return ang_t'(32);
      14: return ang_t'(16);     15: return ang_t'(8);
      default: return (i < ANG_FRAC) ? ang_t'(1 << (ANG_FRAC - i)) : ang_t'(0);
    endcase
  endfunction

  logic signed [XY_W-1:0] x_q [STAGES];
  logic signed [XY_W-1:0] y_q [STAGES];
  ang_t                   z_q [STAGES];
  logic                   v_q [STAGES];
  sign_adj_t              s_q [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < STAGES; i++) begin
        x_q[i] <= '0;
        y_q[i] <= '0;
        z_q[i] <= '0;
        v_q[i] <= 1'b0;
        s_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < STAGES; i++) begin
        logic signed [XY_W-1:0] xi, yi;
        ang_t                   zi;
        if (i == 0) begin
          xi = K_INIT;
          yi = '0;
          zi = angle;
          v_q[i] <= in_valid;
          s_q[i] <= side_in;
        end else begin
          xi = x_q[i-1];
          yi = y_q[i-1];
          zi = z_q[i-1];
          v_q[i] <= v_q[i-1];
          s_q[i] <= s_q[i-1];
        end
        if (zi >= 0) begin
          x_q[i] <= xi - (yi >>> i);
          y_q[i] <= yi + (xi >>> i);
          z_q[i] <= zi - atan_tab(i);
        end else begin
          x_q[i] <= xi + (yi >>> i);
          y_q[i] <= yi - (xi >>> i);
          z_q[i] <= zi + atan_tab(i);
        end
      end
    end
  end

  assign out_valid = v_q[STAGES-1];
  assign cos_o     = trig_t'(x_q[STAGES-1]);
  assign sin_o     = trig_t'(y_q[STAGES-1]);
  assign side_out  = s_q[STAGES-1];

endmodule
