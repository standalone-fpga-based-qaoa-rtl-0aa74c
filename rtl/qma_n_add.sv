// qma_n_add: N_ADD, the parallel Hadamard accumulation stage.
//
// Each valid mult is the product lambda_l * x_l for column l = count_5th of
// the scaled Hadamard matrix H1 (all entries +1 or -1). All NUM_STATE result
// registers update in the same clock: result[i] += mult when
// H1[i][count_5th] = +1 and result[i] -= mult when it is -1, so after
// NUM_STATE valid inputs result = H1 * D * state. The entry of H1 is
// (-1)^popcount(i & count_5th), the Sylvester form of the n-fold Hadamard
// tensor product; this implementation computes the sign bit as that parity
// instead of holding the matrix in registers, which gives identical bits.
// clear zeroes the results and count_5th at the start of an operation;
// done is high once NUM_STATE terms have been accumulated and stays high
// until the next clear. Result registers carry NUM_QUBIT+1 guard bits over
// the state format because the unnormalised H1 transform grows the vector
// by up to 2^n.
module qma_n_add
  import qma_pkg::*;
#(
  parameter int NUM_QUBIT = 9,
  localparam int NUM_STATE = 1 << NUM_QUBIT,
  localparam int RES_W = STATE_W + NUM_QUBIT + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  cplx_t                   mult,
  output logic signed [RES_W-1:0] result_re [NUM_STATE],
  output logic signed [RES_W-1:0] result_im [NUM_STATE],
  output logic                    done
);

  logic [NUM_QUBIT:0] count_5th;

  assign done = (count_5th == (NUM_QUBIT+1)'(NUM_STATE));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_5th <= '0;
      for (int i = 0; i < NUM_STATE; i++) begin
        result_re[i] <= '0;
        result_im[i] <= '0;
      end
    end else if (clear) begin
      count_5th <= '0;
      for (int i = 0; i < NUM_STATE; i++) begin
        result_re[i] <= '0;
        result_im[i] <= '0;
      end
    end else if (in_valid && !done) begin
      count_5th <= count_5th + 1'b1;
      for (int i = 0; i < NUM_STATE; i++) begin
        logic neg;
        neg = ^(NUM_QUBIT'(i) & count_5th[NUM_QUBIT-1:0]);
        if (neg) begin
          result_re[i] <= result_re[i] - RES_W'(mult.re);
          result_im[i] <= result_im[i] - RES_W'(mult.im);
        end else begin
          result_re[i] <= result_re[i] + RES_W'(mult.re);
          result_im[i] <= result_im[i] + RES_W'(mult.im);
        end
      end
    end
  end

endmodule
