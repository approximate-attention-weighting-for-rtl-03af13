// num_accum -- value-weighted numerator accumulator, N_l = sum_j w_j v_j[l].
//
// D parallel multiply-accumulate lanes (one per output dimension, 64 in the
// published configuration) multiply the unsigned Q0.16 weight w_j by every
// signed element of the value vector v_j in the same cycle and add the
// products into D signed accumulators. ACC_W defaults to
// 1 + 16 + 16 + ceil(log2(197)) = 41 bits, enough for 197 full-scale
// products. clear zeroes all lanes at the start of a row; a weight presented
// together with clear starts the new sums.
//
// Timing: one token per cycle; acc_out reflects a token one cycle after
// in_valid. The lane count follows the published design (64 DSP lanes for
// parallel value accumulation); the widths are this implementation's choice.
module num_accum
  import attn_pkg::*;
#(
  parameter int unsigned D     = D_HEAD,
  parameter int unsigned ACC_W = 1 + W_W + DATA_W + $clog2(N_TOKENS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  weight_t                 w_in,
  input  data_t                   v_in   [D],
  output logic signed [ACC_W-1:0] acc_out [D]
);

  typedef logic signed [ACC_W-1:0] acc_t;

  for (genvar l = 0; l < D; l++) begin : g_lane
    acc_t prod;
    // Weight is unsigned: extend it with a zero sign bit before multiplying.
    assign prod = acc_t'($signed({1'b0, w_in}) * v_in[l]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc_out[l] <= '0;
      end else if (in_valid) begin
        acc_out[l] <= (clear ? acc_t'(0) : acc_out[l]) + prod;
      end else if (clear) begin
        acc_out[l] <= '0;
      end
    end
  end

endmodule
