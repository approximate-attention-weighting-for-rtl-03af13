// vector_divider -- serial restoring divider that normalises the numerator
// vector: o_l = N_l / Z for l = 0 .. D-1.
//
// One divider is shared by all D output dimensions. Each quotient has Q_W
// (16) bits and is produced by restoring division, one bit per cycle, most
// significant bit first: in step k (k = Q_W-1 .. 0) the shifted divisor
// Z << k is trial-subtracted from the partial remainder; if the result is
// not negative it is kept and quotient bit k is 1, otherwise the remainder is
// restored (kept unchanged) and the bit is 0. The division works on the
// magnitude |N_l| and restores the sign at the end, so the quotient is
// truncated toward zero, and it is saturated to the signed Q_W-bit range.
// Because every softmax weight is at most 1 and Z is their sum,
// |N_l| / Z <= max |v| always fits.
//
// Interface and timing: pulse start (while idle) with num_in and den_in
// valid; both must stay stable until done. Element l leaves on o_data with
// o_valid and o_idx = l at the end of its 16 cycles; done pulses with the
// last element. A vector of D = 64 elements takes 64 * 16 = 1024 cycles,
// the figure given for the published design. The serial 16-bit restoring
// scheme follows the published design; magnitude/sign handling, truncation
// and saturation are this implementation's choices.
module vector_divider
  import attn_pkg::*;
#(
  parameter int unsigned D     = D_HEAD,
  parameter int unsigned NUM_W = 1 + W_W + DATA_W + $clog2(N_TOKENS),
  parameter int unsigned Z_W   = W_W + $clog2(N_TOKENS),
  parameter int unsigned Q_W   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [NUM_W-1:0]  num_in [D],
  input  logic        [Z_W-1:0]    den_in,
  output logic                     busy,
  output logic                     o_valid,
  output logic [$clog2(D)-1:0]     o_idx,
  output logic signed [Q_W-1:0]    o_data,
  output logic                     done
);

  localparam int unsigned IDX_W = $clog2(D);
  localparam int unsigned K_W   = $clog2(Q_W);
  localparam int unsigned R_W   = NUM_W + 1;

  typedef logic [R_W-1:0] rem_t;

  logic [IDX_W-1:0] idx_q;
  logic [K_W-1:0]   k_q;          // current quotient bit position
  rem_t             rem_q;
  logic [Q_W-1:0]   quo_q;
  logic             neg_q;

  // ---- one restoring step ----
  logic signed [NUM_W-1:0] n_cur;
  logic                    first_step;
  logic                    neg_cur;
  rem_t                    rem_src, dsor, trial, rem_next;
  logic                    qbit;
  logic [Q_W-1:0]          quo_next;
  logic signed [Q_W-1:0]   result;

  always_comb begin
    n_cur      = num_in[idx_q];
    first_step = (k_q == K_W'(Q_W-1));
    neg_cur    = first_step ? n_cur[NUM_W-1] : neg_q;
    rem_src    = first_step ? (n_cur[NUM_W-1] ? rem_t'(-n_cur) : rem_t'(n_cur)) : rem_q;
    dsor       = rem_t'(den_in) << k_q;
    trial      = rem_src - dsor;
    qbit       = (rem_src >= dsor);
    rem_next   = qbit ? trial : rem_src;          // restore on a failed trial
    quo_next   = {(first_step ? {(Q_W-1){1'b0}} : quo_q[Q_W-2:0]), qbit};
    // Sign and saturation of the finished quotient.
    if (neg_cur) begin
      if (quo_next > Q_W'(1) << (Q_W-1)) result = {1'b1, {(Q_W-1){1'b0}}};
      else                               result = -$signed(quo_next);
    end else begin
      if (quo_next[Q_W-1])               result = {1'b0, {(Q_W-1){1'b1}}};
      else                               result = $signed(quo_next);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      idx_q   <= '0;
      k_q     <= K_W'(Q_W-1);
      rem_q   <= '0;
      quo_q   <= '0;
      neg_q   <= 1'b0;
      o_valid <= 1'b0;
      o_idx   <= '0;
      o_data  <= '0;
      done    <= 1'b0;
    end else begin
      o_valid <= 1'b0;
      done    <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          idx_q <= '0;
          k_q   <= K_W'(Q_W-1);
        end
      end else begin
        rem_q <= rem_next;
        quo_q <= quo_next;
        neg_q <= neg_cur;
        if (k_q == '0) begin
          o_valid <= 1'b1;
          o_idx   <= idx_q;
          o_data  <= result;
          k_q     <= K_W'(Q_W-1);
          if (idx_q == IDX_W'(D-1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end else begin
          k_q <= k_q - 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("vector_divider: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> (den_in != '0))
    else $error("vector_divider: zero denominator");

endmodule
