// attn_row_core -- one softmax attention row with a piecewise-linear
// natural exponential: o = sum_j e~(s_j - max s) v_j / sum_j e~(s_j - max s).
//
// Five datapath blocks are chained as score_mac -> pwl_weight ->
// {num_accum, denom_accum} -> vector_divider, and a small controller runs
// the numerically stable two-pass schedule:
//   CLEAR   one cycle after start: reset the row maximum and the
//           numerator and denominator accumulators.
//   PASS1   for each token j: read k_j in D/LANES slices, compute s_j and
//           track the row maximum. Nothing else is stored.
//   PASS2   for each token j again: recompute s_j from a second read of
//           k_j, form w_j = e~(s_j - max), read v_j and add w_j * v_j into
//           the 64 numerator lanes and w_j into the denominator.
//   DIVIDE  divide the 64 numerators by the denominator, one 16-cycle
//           restoring division per element, streaming o_l out.
// Scores are recomputed in pass 2 rather than buffered, so the core holds no
// score memory and no block RAM; the only table is the 17-entry exponential
// table inside pwl_weight.
//
// Token memory interface: q, k and v live outside the core. q_vec must hold
// the query for the whole row (start to done). k is read one LANES-element
// slice at a time: k_rd_en / k_rd_tok / k_rd_slice in one cycle, k_rd_data
// in the next. v is read as a whole D-element vector the same way
// (v_rd_en / v_rd_tok, then v_rd_data one cycle later).
//
// Timing: every token occupies a fixed slot of PASS1_CYC cycles in pass 1
// and PASS2_CYC cycles in pass 2; the division takes D * 16 cycles. With
// the defaults (N = 197, D = 64, 14- and 21-cycle slots) a row takes
// 1 + 197*14 + 197*21 + 1024 = 7920 cycles from the edge that accepts start
// to the edge that raises done, the row latency given for the published
// design (79.2 us at 100 MHz). The sizes N, D, LANES, the five-block
// structure, the two-pass schedule, the 16-bit serial restoring divider and
// the row latency follow the published design. The slot lengths are this
// implementation's reading of the published cycle counts (the minimum slots
// the pipeline needs are 10 and 12 cycles; the rest is idle padding), and
// the memory interface, its one-cycle read latency, the clear cycle and the
// score scaling are its own choices.
//
// busy is high from the edge after start until done; done pulses for one
// cycle with the last output element, and a new start is accepted in that
// same cycle, so rows can run back to back.
module attn_row_core
  import attn_pkg::*;
#(
  parameter int unsigned N           = N_TOKENS,
  parameter int unsigned D           = D_HEAD,
  parameter int unsigned LANES       = SCORE_LANES,
  parameter int unsigned SCORE_SHIFT = 11,
  parameter int unsigned PASS1_CYC   = 14,
  parameter int unsigned PASS2_CYC   = 21,
  parameter int unsigned Z_W         = W_W + $clog2(N),
  parameter int unsigned NUM_W       = 1 + W_W + DATA_W + $clog2(N)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // row control
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  // query, held stable while busy
  input  data_t                       q_vec [D],
  // key read port (one slice per read, data one cycle later)
  output logic                        k_rd_en,
  output logic [$clog2(N)-1:0]        k_rd_tok,
  output logic [$clog2(D/LANES)-1:0]  k_rd_slice,
  input  data_t                       k_rd_data [LANES],
  // value read port (whole vector per read, data one cycle later)
  output logic                        v_rd_en,
  output logic [$clog2(N)-1:0]        v_rd_tok,
  input  data_t                       v_rd_data [D],
  // attention output, one element per valid
  output logic                        o_valid,
  output logic [$clog2(D)-1:0]        o_idx,
  output logic signed [DATA_W-1:0]    o_data,
  // row statistics
  output score_t                      row_max,
  output logic [Z_W-1:0]              row_denom
);

  localparam int unsigned SLICES  = D / LANES;
  localparam int unsigned TOK_W   = $clog2(N);
  localparam int unsigned SL_W    = $clog2(SLICES);
  localparam int unsigned CYC_W   = $clog2((PASS1_CYC > PASS2_CYC ? PASS1_CYC : PASS2_CYC) + 1);
  // Slot offsets: k slices are read in cycles 0..SLICES-1, the score is
  // valid in cycle SLICES+1 and the weight PWL_LAT cycles later.
  localparam int unsigned V_RD_CYC = SLICES + PWL_LAT;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_PASS1, S_PASS2, S_DIVIDE} state_t;

  state_t             state;
  logic [TOK_W-1:0]   tok;
  logic [CYC_W-1:0]   cyc;
  logic               slot_end, last_tok;

  assign last_tok = (tok == TOK_W'(N-1));
  always_comb begin
    unique case (state)
      S_PASS1: slot_end = (cyc == CYC_W'(PASS1_CYC-1));
      S_PASS2: slot_end = (cyc == CYC_W'(PASS2_CYC-1));
      default: slot_end = 1'b0;
    endcase
  end

  logic div_start, div_busy, div_done;
  assign div_start = (state == S_PASS2) && slot_end && last_tok;

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      tok   <= '0;
      cyc   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) state <= S_CLEAR;
        S_CLEAR: begin
          state <= S_PASS1;
          tok   <= '0;
          cyc   <= '0;
        end
        S_PASS1, S_PASS2: begin
          if (slot_end) begin
            cyc <= '0;
            if (last_tok) begin
              tok   <= '0;
              state <= (state == S_PASS1) ? S_PASS2 : S_DIVIDE;
            end else begin
              tok <= tok + 1'b1;
            end
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        S_DIVIDE: if (div_done) state <= start ? S_CLEAR : S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) && !div_done;
  assign done = div_done;

  // ---------------- token reads ----------------
  logic in_pass;
  assign in_pass    = (state == S_PASS1) || (state == S_PASS2);
  assign k_rd_en    = in_pass && (cyc < CYC_W'(SLICES));
  assign k_rd_tok   = tok;
  assign k_rd_slice = SL_W'(cyc);
  assign v_rd_en    = (state == S_PASS2) && (cyc == CYC_W'(V_RD_CYC));
  assign v_rd_tok   = tok;

  // Read-data qualifiers, aligned with the one-cycle memory latency.
  logic            rd_v, rd_first, rd_last, rd_p1;
  logic [SL_W-1:0] rd_slice;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v     <= 1'b0;
      rd_first <= 1'b0;
      rd_last  <= 1'b0;
      rd_p1    <= 1'b0;
      rd_slice <= '0;
    end else begin
      rd_v     <= k_rd_en;
      rd_first <= k_rd_en && (cyc == '0);
      rd_last  <= k_rd_en && (cyc == CYC_W'(SLICES-1));
      rd_p1    <= (state == S_PASS1);
      rd_slice <= k_rd_slice;
    end
  end

  data_t q_slice [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) q_slice[l] = q_vec[int'(rd_slice) * LANES + l];
  end

  // ---------------- datapath ----------------
  logic    s_valid;
  score_t  s_val, s_max;
  logic    row_clear;
  assign row_clear = (state == S_CLEAR);

  score_mac #(.LANES(LANES), .D(D), .SCORE_SHIFT(SCORE_SHIFT)) u_score (
    .clk, .rst_n,
    .row_clear (row_clear),
    .track_max (rd_p1),
    .in_valid  (rd_v),
    .in_first  (rd_first),
    .in_last   (rd_last),
    .q_slice   (q_slice),
    .k_slice   (k_rd_data),
    .s_valid   (s_valid),
    .s_out     (s_val),
    .s_max     (s_max)
  );

  logic    w_valid;
  weight_t w_val;

  pwl_weight u_pwl (
    .clk, .rst_n,
    .in_valid     (s_valid && (state == S_PASS2)),
    .s_in         (s_val),
    .s_max_in     (s_max),
    .w_valid      (w_valid),
    .w_out        (w_val),
    .clip_out     (),
    .endpoint_out ()
  );

  denom_accum #(.Z_W(Z_W)) u_denom (
    .clk, .rst_n,
    .clear    (row_clear),
    .in_valid (w_valid),
    .w_in     (w_val),
    .z_out    (row_denom)
  );

  logic signed [NUM_W-1:0] num [D];

  num_accum #(.D(D), .ACC_W(NUM_W)) u_num (
    .clk, .rst_n,
    .clear    (row_clear),
    .in_valid (w_valid),
    .w_in     (w_val),
    .v_in     (v_rd_data),
    .acc_out  (num)
  );

  vector_divider #(.D(D), .NUM_W(NUM_W), .Z_W(Z_W), .Q_W(DATA_W)) u_div (
    .clk, .rst_n,
    .start   (div_start),
    .num_in  (num),
    .den_in  (row_denom),
    .busy    (div_busy),
    .o_valid (o_valid),
    .o_idx   (o_idx),
    .o_data  (o_data),
    .done    (div_done)
  );

  assign row_max = s_max;

  // ---------------- checks ----------------
  initial begin
    assert (D % LANES == 0)               else $error("D must be a multiple of LANES");
    assert (PASS1_CYC >= SLICES + 2)      else $error("pass-1 slot shorter than the score pipeline");
    assert (PASS2_CYC >= V_RD_CYC + 2)    else $error("pass-2 slot shorter than the weight pipeline");
  end

  // The value vector arrives exactly when its weight leaves pwl_weight.
  assert property (@(posedge clk) disable iff (!rst_n) v_rd_en |=> w_valid)
    else $error("attn_row_core: value read not aligned with weight");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("attn_row_core: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) div_busy |-> (state == S_DIVIDE))
    else $error("attn_row_core: divider running outside the divide phase");

endmodule
