// tb_attn_row_core -- end-to-end test of the attention-row core at its
// default size (N = 197 tokens, d_k = d_v = 64, 8 score lanes).
//
// A behavioural token memory answers the core's k and v reads with a
// one-cycle latency. For each row the testbench computes the expected
// output with its own bit-accurate model (integer dot products, floor
// scaling by 2^11 with saturation, its own exponential table built from the
// real e^x, truncating division) and checks all 64 outputs bit for bit, the
// row maximum and denominator, the row latency of 7920 cycles, and the
// token rate of each pass (one token every 14 cycles in pass 1, every 21
// cycles in pass 2). It also
// compares the result with an exact floating-point softmax of the same
// scores and reports the largest deviation.
//
// Rows: (0) moderate random data, (1) wide-range data where many weights are
// clipped at u < -8 and scores saturate, (2) a row with one dominant token,
// (3) ViT-like data with scores spread over a few units, started back to
// back with the previous row. The testbench counts how often each mechanism
// of the design occurred (pass-1 and pass-2 token slots, the u = 0 endpoint,
// clipping below -8, score saturation, negative quotients, the divide phase)
// and counts a failure for any that never occurred.
module tb_attn_row_core;
  import attn_pkg::*;

  localparam int N = 197;
  localparam int D = 64;
  localparam int LANES = 8;
  localparam int ROW_CYCLES = 7920;

  logic          clk = 0, rst_n = 0;
  logic          start = 0;
  logic          busy, done;
  data_t         q_vec [D];
  logic          k_rd_en;
  logic [7:0]    k_rd_tok;
  logic [2:0]    k_rd_slice;
  data_t         k_rd_data [LANES];
  logic          v_rd_en;
  logic [7:0]    v_rd_tok;
  data_t         v_rd_data [D];
  logic          o_valid;
  logic [5:0]    o_idx;
  logic signed [15:0] o_data;
  score_t        row_max;
  logic [23:0]   row_denom;

  attn_row_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- token memory model ----------------
  int kmem [N][D];
  int vmem [N][D];
  always_ff @(posedge clk) begin
    if (k_rd_en)
      for (int l = 0; l < LANES; l++) k_rd_data[l] <= data_t'(kmem[k_rd_tok][k_rd_slice*LANES + l]);
    if (v_rd_en)
      for (int l = 0; l < D; l++) v_rd_data[l] <= data_t'(vmem[v_rd_tok][l]);
  end

  // ---------------- mechanism counters ----------------
  int n_pass1_slots = 0, n_pass2_slots = 0, n_clip = 0, n_endpoint = 0;
  int n_score_sat = 0, n_neg_out = 0, n_div_phases = 0, n_rows = 0;
  int cyc_now = 0, last_p1 = 0, last_p2 = 0;
  always @(posedge clk) if (rst_n) begin
    // A score computed with max tracking on is a pass-1 token; a weight
    // leaving the PWL unit is a pass-2 token.
    // Consecutive tokens of one pass must be exactly one slot apart.
    cyc_now++;
    if (dut.u_score.s_valid && dut.u_score.track_max) begin
      if (n_pass1_slots % N != 0) begin
        checks++;
        if (cyc_now - last_p1 != 14) begin
          failures++;
          $display("FAIL pass-1 token spacing %0d cycles, expected 14", cyc_now - last_p1);
        end
      end
      last_p1 = cyc_now;
      n_pass1_slots++;
    end
    if (dut.u_pwl.w_valid) begin
      if (n_pass2_slots % N != 0) begin
        checks++;
        if (cyc_now - last_p2 != 21) begin
          failures++;
          $display("FAIL pass-2 token spacing %0d cycles, expected 21", cyc_now - last_p2);
        end
      end
      last_p2 = cyc_now;
      n_pass2_slots++;
    end
    if (dut.u_pwl.w_valid && dut.u_pwl.clip_out)     n_clip++;
    if (dut.u_pwl.w_valid && dut.u_pwl.endpoint_out) n_endpoint++;
    if (dut.u_score.s_valid && (dut.u_score.s_out == SCORE_MAX || dut.u_score.s_out == SCORE_MIN))
      n_score_sat++;
    if (o_valid && o_data < 0) n_neg_out++;
    if (dut.div_start) n_div_phases++;
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (6 * ROW_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int tbl [17];
  int exp_o [D];
  int exp_max;
  longint exp_z;
  real flt_o [D];
  real vmax;

  function automatic int pwl_ref(input int u);
    int t, seg, a;
    if (u < -2048) u = -2048;
    t = u + 2048;
    seg = t >> 7;
    a = t & 127;
    if (seg == 16) return tbl[16];
    return tbl[seg] + (((tbl[seg+1] - tbl[seg]) * a) >> 7);
  endfunction

  task automatic compute_ref();
    int s [N];
    longint acc, nl;
    real fz, fw [N];
    exp_max = -32768;
    for (int j = 0; j < N; j++) begin
      acc = 0;
      for (int i = 0; i < D; i++) acc += longint'(q_vec[i]) * longint'(kmem[j][i]);
      acc = acc >>> 11;
      if (acc > 32767) acc = 32767;
      if (acc < -32768) acc = -32768;
      s[j] = int'(acc);
      if (s[j] > exp_max) exp_max = s[j];
    end
    exp_z = 0;
    fz = 0.0;
    for (int j = 0; j < N; j++) begin
      exp_z += pwl_ref(s[j] - exp_max);
      fw[j] = $exp(real'(s[j] - exp_max) / 256.0);
      fz += fw[j];
    end
    vmax = 1.0;
    for (int l = 0; l < D; l++) begin
      real fo;
      nl = 0;
      fo = 0.0;
      for (int j = 0; j < N; j++) begin
        nl += longint'(pwl_ref(s[j] - exp_max)) * longint'(vmem[j][l]);
        fo += fw[j] * real'(vmem[j][l]);
        if (real'(vmem[j][l]) > vmax) vmax = real'(vmem[j][l]);
        if (-real'(vmem[j][l]) > vmax) vmax = -real'(vmem[j][l]);
      end
      nl = nl / exp_z;
      if (nl > 32767) nl = 32767;
      if (nl < -32768) nl = -32768;
      exp_o[l] = int'(nl);
      flt_o[l] = fo / fz;
    end
  endtask

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int rnd(input int mag);
    return int'($urandom_range(2 * mag)) - mag;
  endfunction

  task automatic fill_row(input int kind);
    for (int i = 0; i < D; i++) q_vec[i] = data_t'(rnd(kind == 1 ? 6000 : (kind == 3 ? 400 : 1024)));
    for (int j = 0; j < N; j++)
      for (int i = 0; i < D; i++) begin
        kmem[j][i] = rnd(kind == 1 ? 6000 : (kind == 3 ? 400 : 1024));
        vmem[j][i] = (kind == 1) ? int'($urandom_range(65535)) - 32768 : rnd(4096);
      end
    if (kind == 1) begin
      for (int i = 0; i < D; i++) begin
        kmem[5][i] = q_vec[i];       // saturates high
        kmem[6][i] = -q_vec[i];      // saturates low
        vmem[7][i] = -32768;
      end
    end
    if (kind == 2) begin
      for (int i = 0; i < D; i++) kmem[100][i] = q_vec[i] > 0 ? 4000 : -4000;
    end
  endtask

  // Run one row; returns the cycles from the start edge to the done edge.
  task automatic run_row(input int kind);
    int got, cycles;
    real err, max_err;
    compute_ref();
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 0; got = 0; max_err = 0.0;
    while (1) begin
      @(posedge clk);
      cycles++;
      #1;
      if (o_valid) begin
        check("output element", o_data, exp_o[o_idx]);
        check("output order", o_idx, got);
        err = real'(o_data) - flt_o[o_idx];
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        got++;
      end
      if (done) break;
    end
    check("row latency (cycles)", cycles, ROW_CYCLES);
    check("outputs per row", got, D);
    check("row maximum", row_max, exp_max);
    check("row denominator", row_denom, exp_z);
    // Softmax-level sanity: the PWL error (<= 0.0245 per weight) keeps the
    // output within ten percent of the largest value magnitude.
    checks++;
    if (max_err > 0.10 * vmax + 1.0) begin
      failures++;
      $display("FAIL row %0d: deviation from exact softmax %f (vmax %f)", kind, max_err, vmax);
    end
    $display("row %0d: %0d cycles, max |o - exact softmax| = %0.2f LSB of %0.0f",
             kind, cycles, max_err, vmax);
    n_rows++;
  endtask

  initial begin
    for (int i = 0; i < 17; i++) begin
      real y;
      y = $exp(-8.0 + 0.5 * i) * 65536.0;
      tbl[i] = (y >= 65535.0) ? 65535 : $rtoi(y + 0.5);
    end
    for (int i = 0; i < D; i++) q_vec[i] = '0;
    for (int l = 0; l < LANES; l++) k_rd_data[l] = '0;
    for (int l = 0; l < D; l++) v_rd_data[l] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int kind = 0; kind < 4; kind++) begin
      fill_row(kind);
      if (kind != 3) repeat (3) @(posedge clk);
      run_row(kind);
    end
    $display("mechanisms: pass1 slots %0d, pass2 slots %0d, u=0 endpoints %0d, clipped %0d, saturated scores %0d, negative outputs %0d, divide phases %0d",
             n_pass1_slots, n_pass2_slots, n_endpoint, n_clip, n_score_sat, n_neg_out, n_div_phases);
    check("pass-1 token slots", n_pass1_slots, 4 * N);
    check("pass-2 token slots", n_pass2_slots, 4 * N);
    check("divide phases", n_div_phases, 4);
    checks++; if (n_endpoint == 0)  begin failures++; $display("FAIL endpoint never reached"); end
    checks++; if (n_clip == 0)      begin failures++; $display("FAIL clipping never happened"); end
    checks++; if (n_score_sat == 0) begin failures++; $display("FAIL score saturation never happened"); end
    checks++; if (n_neg_out == 0)   begin failures++; $display("FAIL no negative output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
