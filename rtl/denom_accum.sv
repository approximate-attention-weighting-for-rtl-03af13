// denom_accum -- softmax denominator accumulator, Z = sum_j w_j.
//
// Adds each unsigned Q0.16 weight into a Z_W-bit register. Z_W defaults to
// 16 + ceil(log2(197)) = 24 bits, which holds the sum of 197 weights of at
// most 0xFFFF without overflow. clear zeroes the register at the start of a
// row; when clear and in_valid coincide the new weight starts the sum.
//
// Timing: the sum including a weight presented with in_valid is visible on
// z_out one cycle later. The accumulation itself follows the published
// design; the width and the clear behaviour are this implementation's choices.
module denom_accum
  import attn_pkg::*;
#(
  parameter int unsigned Z_W = W_W + $clog2(N_TOKENS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  weight_t        w_in,
  output logic [Z_W-1:0] z_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_out <= '0;
    end else if (in_valid) begin
      z_out <= (clear ? '0 : z_out) + Z_W'(w_in);
    end else if (clear) begin
      z_out <= '0;
    end
  end

endmodule
