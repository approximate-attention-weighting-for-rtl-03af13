// tb_score_mac -- self-checking test of the score path.
//
// Streams random q / k_j vectors (64 elements, 8 slices of 8) through
// score_mac, computes each expected Q8.8 score in the testbench as
// floor(q . k / 2^11) saturated to 16 bits, and checks the score, the
// one-cycle latency after the last slice and the running row maximum over a
// row of tokens (pass 1), including a row where track_max is low (pass 2
// must leave the maximum alone). Some tokens use large elements so that the
// saturation limits are reached.
module tb_score_mac;
  import attn_pkg::*;

  localparam int LANES = 8;
  localparam int D     = 64;
  localparam int SH    = 11;

  logic   clk = 0;
  logic   rst_n = 0;
  logic   row_clear = 0, track_max = 0, in_valid = 0, in_first = 0, in_last = 0;
  data_t  q_slice [LANES];
  data_t  k_slice [LANES];
  logic   s_valid;
  score_t s_out, s_max;

  int checks = 0, failures = 0;

  score_mac #(.LANES(LANES), .D(D), .SCORE_SHIFT(SH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_score(input int qv[D], input int kv[D]);
    longint acc = 0;
    longint sh;
    for (int i = 0; i < D; i++) acc += longint'(qv[i]) * longint'(kv[i]);
    sh = acc >>> SH;
    if (sh > 32767) sh = 32767;
    if (sh < -32768) sh = -32768;
    return int'(sh);
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Drive one token; returns the expected score.
  task automatic run_token(input int qv[D], input int kv[D], input bit track,
                           inout int exp_max);
    int e;
    e = ref_score(qv, kv);
    for (int s = 0; s < D / LANES; s++) begin
      in_valid  <= 1;
      in_first  <= (s == 0);
      in_last   <= (s == D / LANES - 1);
      track_max <= track;
      for (int l = 0; l < LANES; l++) begin
        q_slice[l] <= data_t'(qv[s*LANES + l]);
        k_slice[l] <= data_t'(kv[s*LANES + l]);
      end
      @(posedge clk);
    end
    in_valid <= 0; in_first <= 0; in_last <= 0;
    #1;
    check("s_valid one cycle after last slice", s_valid, 1);
    check("score", s_out, e);
    if (track && e > exp_max) exp_max = e;
    check("row max", s_max, exp_max);
    @(posedge clk);
    #1;
    check("s_valid single cycle", s_valid, 0);
  endtask

  initial begin
    int qv[D], kv[D];
    int exp_max;
    for (int l = 0; l < LANES; l++) begin q_slice[l] = '0; k_slice[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int row = 0; row < 4; row++) begin
      row_clear <= 1; @(posedge clk); row_clear <= 0;
      exp_max = -32768;
      for (int t = 0; t < 20; t++) begin
        int mag;
        mag = (t % 7 == 3) ? 32767 : ((t % 3 == 0) ? 4000 : 700);
        for (int i = 0; i < D; i++) begin
          qv[i] = int'($urandom_range(2*mag)) - mag;
          kv[i] = int'($urandom_range(2*mag)) - mag;
        end
        if (t == 10) for (int i = 0; i < D; i++) kv[i] = -qv[i];  // large negative score
        run_token(qv, kv, row != 3, exp_max);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
