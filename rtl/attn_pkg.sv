// attn_pkg -- shared sizes, number formats and the exponential boundary table
// of the approximate attention-row core.
//
// The core evaluates one softmax attention row, o = sum_j p_j v_j with
// p_j = e~(u_j) / sum_k e~(u_k), for N tokens of head dimension D. All
// modules share the following fixed-point conventions:
//   * q, k and v elements are signed DATA_W-bit integers (INT16).
//   * scores s_j and max-centred scores u_j are signed Q8.8 (16 bits).
//   * exponential weights w_j = e~(u_j) are unsigned Q0.16 (16 bits); the
//     endpoint e^0 = 1.0 does not fit Q0.16 and is saturated to 0xFFFF.
// The 16-segment, 17-entry boundary table y_i = e^(-8 + 0.5 i), i = 0..16,
// is stored as round(e^(-8 + 0.5 i) * 65536), the last entry saturated to
// 65535. That table, the segment count, the [-8,0] domain, the Q8.8 input,
// the 16-bit entries, N = 197, D = 64 and 8 score lanes follow the published
// design; the accumulator widths and the score scaling shift are this
// implementation's own choices (the smallest widths that cannot overflow).
package attn_pkg;

  // Row geometry (published configuration: ViT-B/16-style row).
  parameter int unsigned N_TOKENS    = 197;  // tokens per attention row
  parameter int unsigned D_HEAD      = 64;   // d_k = d_v
  parameter int unsigned SCORE_LANES = 8;    // DSP MAC lanes in the score path

  // Number formats.
  parameter int unsigned DATA_W  = 16;       // q, k, v element width (INT16)
  parameter int unsigned SCORE_W = 16;       // Q8.8 score
  parameter int unsigned FRAC_W  = 8;        // fraction bits of the score
  parameter int unsigned W_W     = 16;       // Q0.16 exponential weight

  // Piecewise-linear exponential.
  parameter int unsigned PWL_SEGS  = 16;               // uniform segments on [-8,0]
  parameter int unsigned SEG_BITS  = 4;                // log2(PWL_SEGS)
  parameter int unsigned ALPHA_W   = 7;                // offset bits: 0.5 = 128 LSB of Q8.8
  parameter int unsigned PWL_LAT   = 2;                // pipeline latency of pwl_weight

  typedef logic signed [DATA_W-1:0]  data_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic        [W_W-1:0]     weight_t;

  // 17 boundary values, 16 bits each (272 bits of table).
  typedef logic [W_W-1:0] pwl_table_t [PWL_SEGS+1];
  localparam pwl_table_t PWL_TABLE = '{
    16'd22,    16'd36,    16'd60,    16'd99,
    16'd162,   16'd268,   16'd442,   16'd728,
    16'd1200,  16'd1979,  16'd3263,  16'd5380,
    16'd8869,  16'd14623, 16'd24109, 16'd39750,
    16'd65535
  };

  // Most negative Q8.8 score, used to reset the row-maximum register.
  localparam score_t SCORE_MIN = {1'b1, {(SCORE_W-1){1'b0}}};
  localparam score_t SCORE_MAX = {1'b0, {(SCORE_W-1){1'b1}}};

endpackage
