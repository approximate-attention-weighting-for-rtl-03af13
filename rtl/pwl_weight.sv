// pwl_weight -- natural-exponential attention weight by 16-segment
// piecewise-linear interpolation (no block RAM, one small constant table).
//
// For a Q8.8 score s_j and the row maximum s_max it forms the max-centred
// input u_j = s_j - s_max (<= 0 by construction), clips it to [-8, 0] and
// evaluates
//     w_j = y_i + alpha * (y_{i+1} - y_i),   y_i = e^(-8 + 0.5 i),
// where i is the segment and alpha in [0,1) the offset inside it. After
// adding 8.0 (2048 LSB) the clipped input t = u + 8 lies in [0, 2048], so the
// segment index is simply bits [11:7] of t and alpha is bits [6:0] (a
// segment is 0.5 = 128 LSB wide). t = 2048 (u = 0) selects entry 16 with
// alpha = 0, i.e. the saturated endpoint 0xFFFF. The product
// alpha * (y_{i+1} - y_i) is truncated to 16 bits (>> 7).
//
// The table y_i holds 17 entries of 16 bits (272 bits) in Q0.16. It is a
// constant from attn_pkg, small enough for distributed LUT storage; since no
// way of loading it is described, it has no write port.
//
// Interface and timing: two pipeline stages. in_valid/s_in/s_max_in enter;
// w_valid/w_out leave two cycles later. clip_out flags a weight whose input
// was below -8 and was saturated to the lower boundary; endpoint_out flags
// the u = 0 endpoint. One result per cycle can be accepted.
//
// The segment count, domain, Q8.8 input, bit-field extraction, 16-bit table
// and endpoint saturation follow the published design. The pipeline depth,
// truncation of the interpolation product and the flags are this
// implementation's choices.
module pwl_weight
  import attn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  score_t  s_in,
  input  score_t  s_max_in,
  output logic    w_valid,
  output weight_t w_out,
  output logic    clip_out,
  output logic    endpoint_out
);

  localparam int unsigned T_W   = SEG_BITS + 1 + ALPHA_W;        // 12 bits: 0..2048
  localparam int signed   U_LOW = -(int'(PWL_SEGS) << ALPHA_W);  // -8.0 in Q8.8

  typedef logic signed [SCORE_W:0] diff_t;   // 17-bit difference, cannot overflow

  // ---- stage 1: centre, clip, split into segment and offset, table read ----
  diff_t                 u;
  logic [T_W-1:0]        t;
  logic [SEG_BITS:0]     seg;                // 0..16
  logic [SEG_BITS:0]     seg_hi;
  logic [ALPHA_W-1:0]    alpha;
  logic                  clip;

  always_comb begin
    u    = diff_t'(s_in) - diff_t'(s_max_in);
    clip = 1'b0;
    if (u < diff_t'(U_LOW)) begin
      t    = '0;                             // saturate to the lower boundary
      clip = 1'b1;
    end else if (u > 0) begin
      t    = T_W'(-U_LOW);                   // cannot occur when s_max is the true maximum
    end else begin
      t    = T_W'(u - diff_t'(U_LOW));
    end
    seg    = t[T_W-1 -: SEG_BITS+1];
    alpha  = t[ALPHA_W-1:0];
    seg_hi = (seg == (SEG_BITS+1)'(PWL_SEGS)) ? seg : seg + 1'b1;
  end

  logic               v1;
  weight_t            y_lo_q, y_hi_q;
  logic [ALPHA_W-1:0] alpha_q;
  logic               clip_q, end_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1      <= 1'b0;
      y_lo_q  <= '0;
      y_hi_q  <= '0;
      alpha_q <= '0;
      clip_q  <= 1'b0;
      end_q   <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        y_lo_q  <= PWL_TABLE[seg];
        y_hi_q  <= PWL_TABLE[seg_hi];
        alpha_q <= alpha;
        clip_q  <= clip;
        end_q   <= (seg == (SEG_BITS+1)'(PWL_SEGS));
      end
    end
  end

  // ---- stage 2: linear interpolation ----
  logic [W_W+ALPHA_W-1:0] prod;
  weight_t                w_next;

  always_comb begin
    prod   = (W_W+ALPHA_W)'(y_hi_q - y_lo_q) * (W_W+ALPHA_W)'(alpha_q);
    w_next = y_lo_q + weight_t'(prod >> ALPHA_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid      <= 1'b0;
      w_out        <= '0;
      clip_out     <= 1'b0;
      endpoint_out <= 1'b0;
    end else begin
      w_valid <= v1;
      if (v1) begin
        w_out        <= w_next;
        clip_out     <= clip_q;
        endpoint_out <= end_q;
      end
    end
  end

  // Max-centred inputs are never positive.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> (s_in <= s_max_in))
    else $error("pwl_weight: score above row maximum");

endmodule
