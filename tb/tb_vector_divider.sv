// tb_vector_divider -- self-checking test of the serial restoring divider.
//
// Builds numerator vectors the way the core does (sums of w_j * v_j[l] over
// up to 197 tokens, so |N_l| / Z never exceeds the largest |v|), plus
// hand-picked edge cases (zero, exact multiples, the most negative value,
// a single dominant token), starts the divider and checks every streamed
// quotient against N_l / Z truncated toward zero, the element index order,
// the 16-cycle spacing between elements, the 1024-cycle total for 64
// elements, the done pulse and the busy flag.
module tb_vector_divider;
  import attn_pkg::*;

  localparam int D = 64;

  logic               clk = 0, rst_n = 0;
  logic               start = 0;
  logic signed [40:0] num_in [D];
  logic [23:0]        den_in = '0;
  logic               busy, o_valid, done;
  logic [5:0]         o_idx;
  logic signed [15:0] o_data;

  int checks = 0, failures = 0;
  longint expq [D];

  vector_divider dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_vector(input int kind);
    longint z, n[D];
    int ntok, cyc, last_cyc, got;
    int w[197];
    int v;
    ntok = (kind == 1) ? 1 : int'($urandom_range(196)) + 1;
    z = 0;
    for (int l = 0; l < D; l++) n[l] = 0;
    for (int j = 0; j < ntok; j++) begin
      w[j] = (j == 0) ? 65535 : int'($urandom_range(65535));
      z += w[j];
    end
    for (int l = 0; l < D; l++)
      for (int j = 0; j < ntok; j++) begin
        v = int'($urandom_range(65535)) - 32768;
        if (kind == 2) v = (l % 2 == 0) ? -32768 : 32767;
        if (kind == 3) v = l - 32;
        n[l] += longint'(w[j]) * longint'(v);
      end
    if (kind == 4) begin
      z = 1000;
      for (int l = 0; l < D; l++) n[l] = (l % 3 == 0) ? 0 : ((l % 3 == 1) ? 1000 * (l - 32) : -999 * l);
    end
    for (int l = 0; l < D; l++) begin
      num_in[l] <= 41'(n[l]);
      // Truncation toward zero, as SystemVerilog integer division does.
      expq[l] = n[l] / z;
      if (expq[l] > 32767) expq[l] = 32767;
      if (expq[l] < -32768) expq[l] = -32768;
    end
    den_in <= 24'(z);
    start <= 1;
    @(posedge clk);
    start <= 0;
    cyc = 0; got = 0; last_cyc = 0;
    while (1) begin
      @(posedge clk);
      cyc++;
      #1;
      if (o_valid) begin
        check("quotient", o_data, expq[got]);
        check("index order", o_idx, got);
        check("16 cycles per element", cyc - last_cyc, 16);
        last_cyc = cyc;
        got++;
      end
      if (done) break;
      check("busy while dividing", busy, 1);
    end
    check("elements returned", got, D);
    check("cycles per vector", cyc, 1024);
    #1;
    @(posedge clk); #1;
    check("idle after done", busy, 0);
  endtask

  initial begin
    for (int l = 0; l < D; l++) num_in[l] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int k = 0; k < 8; k++) run_vector(k % 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
