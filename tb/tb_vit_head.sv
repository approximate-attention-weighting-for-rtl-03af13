// tb_vit_head -- one ViT attention head on the attention-row core, at its
// default size (197 tokens, d_k = d_v = 64).
//
// The query rows of one head share the same K and V, so the testbench fills
// a token memory once per head and runs query rows through the core back to
// back: all 197 rows of one complete head (the attention of one head of one
// ViT layer for one 224x224 image), then a few rows of three more heads. Data are ViT-like: roughly Gaussian elements (sum of four
// uniforms) with a per-head spread, so some heads give flat attention and
// some sharply peaked attention. Two precisions are exercised with the same
// core:
//   INT16 - q, k, v use the full Q8.8 / 16-bit range;
//   INT8  - q and k are quantised to an 8-bit grid of step 1/32 (integers
//           -127..127 shifted left by 3 in Q8.8), v to 8-bit integers
//           scaled by 2^7, i.e. per-tensor symmetric INT8 quantisation.
// Each row's output is checked bit for bit against an independent integer
// model of the datapath, and its cosine similarity to exact (floating-point)
// softmax attention on the same quantised inputs must be at least 0.99.
// The row latency must be 7,920 cycles. The testbench reports the lowest
// cosine similarity seen per precision.
module tb_vit_head;
  import attn_pkg::*;

  localparam int N = 197;
  localparam int D = 64;
  localparam int LANES = 8;
  localparam int FULL_HEAD_ROWS = N;    // one query row per token
  localparam int SHORT_HEAD_ROWS = 6;
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

  int kmem [N][D];
  int vmem [N][D];
  always_ff @(posedge clk) begin
    if (k_rd_en)
      for (int l = 0; l < LANES; l++) k_rd_data[l] <= data_t'(kmem[k_rd_tok][k_rd_slice*LANES + l]);
    if (v_rd_en)
      for (int l = 0; l < D; l++) v_rd_data[l] <= data_t'(vmem[v_rd_tok][l]);
  end

  initial begin
    repeat ((FULL_HEAD_ROWS + 3 * SHORT_HEAD_ROWS + 2) * ROW_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference ----------------
  int  tbl [17];
  int  exp_o [D];
  real flt_o [D];

  function automatic int pwl_ref(input int u);
    int t;
    if (u < -2048) u = -2048;
    t = u + 2048;
    if ((t >> 7) == 16) return tbl[16];
    return tbl[t >> 7] + (((tbl[(t >> 7) + 1] - tbl[t >> 7]) * (t & 127)) >> 7);
  endfunction

  task automatic compute_ref();
    int s [N];
    int smax;
    longint acc, z, nl;
    real fz, fw [N];
    smax = -32768;
    for (int j = 0; j < N; j++) begin
      acc = 0;
      for (int i = 0; i < D; i++) acc += longint'(q_vec[i]) * longint'(kmem[j][i]);
      acc = acc >>> 11;
      if (acc > 32767) acc = 32767;
      if (acc < -32768) acc = -32768;
      s[j] = int'(acc);
      if (s[j] > smax) smax = s[j];
    end
    z = 0; fz = 0.0;
    for (int j = 0; j < N; j++) begin
      real fs;
      z += pwl_ref(s[j] - smax);
      // Exact softmax on the exact (unrounded) scaled scores.
      fs = 0.0;
      for (int i = 0; i < D; i++) fs += real'(q_vec[i]) * real'(kmem[j][i]);
      fw[j] = fs / 2048.0 / 256.0;
    end
    begin
      real fm;
      fm = fw[0];
      for (int j = 1; j < N; j++) if (fw[j] > fm) fm = fw[j];
      for (int j = 0; j < N; j++) begin fw[j] = $exp(fw[j] - fm); fz += fw[j]; end
    end
    for (int l = 0; l < D; l++) begin
      real fo;
      nl = 0; fo = 0.0;
      for (int j = 0; j < N; j++) begin
        nl += longint'(pwl_ref(s[j] - smax)) * longint'(vmem[j][l]);
        fo += fw[j] * real'(vmem[j][l]);
      end
      nl = nl / z;
      if (nl > 32767) nl = 32767;
      if (nl < -32768) nl = -32768;
      exp_o[l] = int'(nl);
      flt_o[l] = fo / fz;
    end
  endtask

  function automatic real gauss(input real sigma);
    real a;
    a = 0.0;
    for (int i = 0; i < 4; i++) a += real'($urandom_range(65535)) / 65535.0 - 0.5;
    return a * sigma * 1.7320508;   // sum of 4 U(-.5,.5) has variance 1/3
  endfunction

  function automatic int q16(input real x);   // real -> Q8.8, saturating
    int r;
    r = $rtoi(x * 256.0 + (x >= 0 ? 0.5 : -0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  function automatic int q8(input real x);    // real -> INT8 on a 1/32 grid, in Q8.8
    int r;
    r = $rtoi(x * 32.0 + (x >= 0 ? 0.5 : -0.5));
    if (r > 127) r = 127;
    if (r < -127) r = -127;
    return r * 8;
  endfunction

  real min_cos [2] = '{1.0, 1.0};

  task automatic run_head(input int prec, input real sigma_qk, input int rows);
    for (int j = 0; j < N; j++)
      for (int i = 0; i < D; i++) begin
        kmem[j][i] = prec ? q8(gauss(sigma_qk)) : q16(gauss(sigma_qk));
        vmem[j][i] = prec ? ($rtoi(gauss(40.0)) * 128) : $rtoi(gauss(4000.0));
        if (prec && vmem[j][i] > 127 * 128) vmem[j][i] = 127 * 128;
        if (prec && vmem[j][i] < -127 * 128) vmem[j][i] = -127 * 128;
      end
    for (int r = 0; r < rows; r++) begin
      int cycles, got;
      real dot, na, nb, cs;
      for (int i = 0; i < D; i++) q_vec[i] = data_t'(prec ? q8(gauss(sigma_qk)) : q16(gauss(sigma_qk)));
      compute_ref();
      start <= 1;
      @(posedge clk);
      start <= 0;
      cycles = 0; got = 0; dot = 0.0; na = 0.0; nb = 0.0;
      while (1) begin
        @(posedge clk);
        cycles++;
        #1;
        if (o_valid) begin
          checks++;
          if (int'(o_data) != exp_o[o_idx]) begin
            failures++;
            if (failures < 20) $display("FAIL o[%0d]: got %0d expected %0d", o_idx, o_data, exp_o[o_idx]);
          end
          dot += real'(o_data) * flt_o[o_idx];
          na  += real'(o_data) * real'(o_data);
          nb  += flt_o[o_idx] * flt_o[o_idx];
          got++;
        end
        if (done) break;
      end
      checks++;
      if (cycles != ROW_CYCLES || got != D) begin
        failures++;
        $display("FAIL row timing: %0d cycles, %0d outputs", cycles, got);
      end
      cs = dot / ($sqrt(na * nb) + 1e-30);
      if (cs < min_cos[prec]) min_cos[prec] = cs;
      checks++;
      if (cs < 0.99) begin
        failures++;
        $display("FAIL cosine similarity %f (prec %0d, sigma %f)", cs, prec, sigma_qk);
      end
    end
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
    // Heads with flat (0.7), moderate (1.5) and peaked (2.5) attention.
    run_head(0, 1.5, FULL_HEAD_ROWS);   // a complete head: all 197 query rows
    run_head(0, 0.7, SHORT_HEAD_ROWS);
    run_head(1, 1.5, SHORT_HEAD_ROWS);
    run_head(1, 2.5, SHORT_HEAD_ROWS);
    $display("lowest cosine similarity to exact softmax attention: INT16 %f, INT8 %f",
             min_cos[0], min_cos[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
