// score_mac -- dot-product score path with row-maximum tracking.
//
// Computes s_j = (q . k_j) / sqrt(d_k) for one token at a time. LANES
// signed multipliers work in parallel on one LANES-element slice of q and
// k_j per cycle, so a D-element dot product takes D/LANES slices (8 slices
// of 8 for the published D = 64, LANES = 8). The raw sum is an integer of
// 2*DATA_W + log2(D) bits; the 1/sqrt(d_k) factor and the conversion to the
// Q8.8 score format are folded into one arithmetic right shift by
// SCORE_SHIFT (rounding toward minus infinity) followed by saturation to
// 16 bits. With q and k in Q8.8 and D = 64, the default shift of 11 is 8
// bits of format conversion plus log2(sqrt(64)) = 3.
//
// When track_max is high the registered score also updates the row-maximum
// register s_max (pass 1 of the two-pass schedule). row_clear resets s_max
// to the most negative score at the start of a row.
//
// Interface and timing: present a slice with in_valid; mark the first slice
// of a token with in_first and the last with in_last. The score appears on
// s_out with s_valid one cycle after the in_last slice; s_max is updated on
// the same edge. The lane count and D follow the published design (8 DSP
// lanes, d_k = 64); the slice protocol, the shift and saturation are this
// implementation's choices.
module score_mac
  import attn_pkg::*;
#(
  parameter int unsigned LANES       = SCORE_LANES,
  parameter int unsigned D           = D_HEAD,
  parameter int unsigned SCORE_SHIFT = 11
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   row_clear,            // start of a row: s_max <- most negative
  input  logic   track_max,            // update s_max with each new score
  input  logic   in_valid,
  input  logic   in_first,             // first slice of a token
  input  logic   in_last,              // last slice of a token
  input  data_t  q_slice [LANES],
  input  data_t  k_slice [LANES],
  output logic   s_valid,
  output score_t s_out,                // Q8.8 score of the finished token
  output score_t s_max                 // running row maximum
);

  localparam int unsigned PROD_W = 2 * DATA_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(D);

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t acc_q;
  acc_t slice_sum;
  acc_t acc_next;
  acc_t shifted;
  score_t s_sat;

  // Sum of the LANES products of this slice.
  always_comb begin
    slice_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      slice_sum = slice_sum + acc_t'(q_slice[l] * k_slice[l]);
    end
    acc_next = (in_first ? acc_t'(0) : acc_q) + slice_sum;
  end

  // Scale and saturate the finished sum to Q8.8.
  always_comb begin
    shifted = acc_next >>> SCORE_SHIFT;
    if (shifted > acc_t'(SCORE_MAX))      s_sat = SCORE_MAX;
    else if (shifted < acc_t'(SCORE_MIN)) s_sat = SCORE_MIN;
    else                                   s_sat = score_t'(shifted);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      s_valid <= 1'b0;
      s_out   <= '0;
      s_max   <= SCORE_MIN;
    end else begin
      s_valid <= in_valid && in_last;
      if (in_valid) acc_q <= acc_next;
      if (in_valid && in_last) begin
        s_out <= s_sat;
      end
      if (row_clear) begin
        s_max <= SCORE_MIN;
      end else if (in_valid && in_last && track_max && (s_sat > s_max)) begin
        s_max <= s_sat;
      end
    end
  end

  // D must split into whole slices.
  initial assert (D % LANES == 0) else $error("D must be a multiple of LANES");

endmodule
