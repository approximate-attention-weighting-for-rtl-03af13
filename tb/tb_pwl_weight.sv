// tb_pwl_weight -- self-checking test of the PWL natural-exponential weight.
//
// The testbench builds its own boundary table from the real-valued
// exponential, y_i = min(65535, round(e^(-8+0.5 i) * 65536)), and its own
// interpolation in integer arithmetic, then sweeps every max-centred input
// u from -9.0 to 0 (Q8.8) through the unit with random score / maximum
// pairs that give that u. For each result it checks the weight bit for bit,
// the two-cycle latency, the clip and endpoint flags, that the weight never
// falls when u rises (monotonicity) and that it stays within 0.0246 (plus
// half an LSB of quantisation) of the exact e^u.
module tb_pwl_weight;
  import attn_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    in_valid = 0;
  score_t  s_in = '0, s_max_in = '0;
  logic    w_valid;
  weight_t w_out;
  logic    clip_out, endpoint_out;

  int checks = 0, failures = 0;
  int table_ref[17];
  real max_err = 0.0;

  pwl_weight dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_w(input int u);
    int t, seg, a;
    if (u < -2048) u = -2048;
    if (u > 0) u = 0;
    t   = u + 2048;
    seg = t / 128;
    a   = t % 128;
    if (seg == 16) return table_ref[16];
    return table_ref[seg] + ((table_ref[seg+1] - table_ref[seg]) * a) / 128;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Expected outputs, queued at issue time.
  int exp_q[$];
  int u_q[$];
  int prev_w;
  int prev_u;
  int n_out = 0;

  // Scoreboard on the output side: every w_valid must match the oldest
  // issued input issued exactly two cycles earlier.
  logic [2:0] issue_hist = '0;
  always @(posedge clk) begin
    issue_hist <= {issue_hist[1:0], in_valid};
    if (rst_n && w_valid) begin
      int e, u;
      real ex, err;
      check("latency of two cycles", int'(issue_hist[1]), 1);
      e = exp_q.pop_front();
      u = u_q.pop_front();
      check("weight", int'(w_out), e);
      check("clip flag", int'(clip_out), int'(u < -2048));
      check("endpoint flag", int'(endpoint_out), int'(u == 0));
      if (n_out > 0 && u > prev_u) begin
        checks++;
        if (int'(w_out) < prev_w) begin
          failures++;
          $display("FAIL monotone: u=%0d w=%0d after w=%0d", u, w_out, prev_w);
        end
      end
      if (u >= -2048) begin
        ex  = $exp(real'(u) / 256.0);
        err = real'(w_out) / 65536.0 - ex;
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        checks++;
        if (err > 0.0246 + 1.0/65536.0) begin
          failures++;
          $display("FAIL accuracy at u=%0d: error %f", u, err);
        end
      end
      prev_w = int'(w_out);
      prev_u = u;
      n_out++;
    end
  end

  initial begin
    for (int i = 0; i < 17; i++) begin
      real y;
      y = $exp(-8.0 + 0.5 * i) * 65536.0;
      table_ref[i] = (y >= 65535.0) ? 65535 : $rtoi(y + 0.5);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    // Back-to-back sweep of u = -2304 .. 0 (-9.0 .. 0.0).
    for (int u = -2304; u <= 0; u++) begin
      int smax, s;
      smax = int'($urandom_range(20000)) - 10000;
      s    = smax + u;
      in_valid <= 1;
      s_in     <= score_t'(s);
      s_max_in <= score_t'(smax);
      exp_q.push_back(ref_w(u));
      u_q.push_back(u);
      @(posedge clk);
    end
    in_valid <= 0;
    // Extreme inputs: most negative score against most positive maximum.
    repeat (3) @(posedge clk);
    in_valid <= 1; s_in <= SCORE_MIN; s_max_in <= SCORE_MAX;
    exp_q.push_back(ref_w(-65535)); u_q.push_back(-65535);
    @(posedge clk);
    in_valid <= 0;
    repeat (5) @(posedge clk);
    check("all results returned", exp_q.size(), 0);
    check("result count", n_out, 2306);
    $display("max abs error vs e^u = %f", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
