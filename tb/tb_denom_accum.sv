// tb_denom_accum -- self-checking test of the denominator accumulator.
//
// Runs several rows of random weights (including rows of 197 full-scale
// weights, the largest sum the core can produce), with gaps in in_valid,
// a clear on its own and a clear together with the first weight, and
// compares z_out with a sum kept in the testbench after every cycle.
module tb_denom_accum;
  import attn_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        clear = 0, in_valid = 0;
  weight_t     w_in = '0;
  logic [23:0] z_out;

  int checks = 0, failures = 0;
  longint exp_z = 0;

  denom_accum dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit c, input bit v, input int w);
    clear <= c; in_valid <= v; w_in <= weight_t'(w);
    @(posedge clk);
    if (v) exp_z = (c ? 0 : exp_z) + w;
    else if (c) exp_z = 0;
    #1;
    checks++;
    if (longint'(z_out) != exp_z) begin
      failures++;
      $display("FAIL z: got %0d expected %0d", z_out, exp_z);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int row = 0; row < 6; row++) begin
      if (row % 2 == 0) step(1, 0, 0);
      for (int j = 0; j < 197; j++) begin
        int w;
        w = (row == 2 || row == 5) ? 65535 : int'($urandom_range(65535));
        step(row % 2 == 1 && j == 0, 1, w);
        if ($urandom_range(3) == 0) step(0, 0, int'($urandom_range(65535)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
