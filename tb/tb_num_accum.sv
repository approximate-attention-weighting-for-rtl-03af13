// tb_num_accum -- self-checking test of the numerator accumulator.
//
// Feeds rows of tokens, each a random Q0.16 weight and a random signed
// 64-element value vector, into the 64 lanes and compares every lane with
// a 64-bit sum kept in the testbench after each token. One row uses
// full-scale weights with the most negative and most positive values to
// exercise the accumulator width; rows alternate between a separate clear
// and a clear given together with the first token.
module tb_num_accum;
  import attn_pkg::*;

  localparam int D = 64;

  logic        clk = 0, rst_n = 0;
  logic        clear = 0, in_valid = 0;
  weight_t     w_in = '0;
  data_t       v_in [D];
  logic signed [40:0] acc_out [D];

  int checks = 0, failures = 0;
  longint exp_acc [D];

  num_accum dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic token(input bit c, input int w, input int vv[D]);
    clear <= c; in_valid <= 1; w_in <= weight_t'(w);
    for (int l = 0; l < D; l++) v_in[l] <= data_t'(vv[l]);
    @(posedge clk);
    in_valid <= 0; clear <= 0;
    for (int l = 0; l < D; l++) exp_acc[l] = (c ? 0 : exp_acc[l]) + longint'(w) * longint'(vv[l]);
    #1;
    for (int l = 0; l < D; l++) begin
      checks++;
      if (longint'(acc_out[l]) != exp_acc[l]) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d: got %0d expected %0d", l, acc_out[l], exp_acc[l]);
      end
    end
  endtask

  initial begin
    int vv[D];
    for (int l = 0; l < D; l++) begin v_in[l] = '0; exp_acc[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int row = 0; row < 4; row++) begin
      if (row % 2 == 0) begin
        clear <= 1; @(posedge clk); clear <= 0;
        for (int l = 0; l < D; l++) exp_acc[l] = 0;
      end
      for (int j = 0; j < 197; j++) begin
        int w;
        for (int l = 0; l < D; l++)
          vv[l] = (row == 1) ? ((l % 2 == 0) ? -32768 : 32767) : int'($urandom_range(65535)) - 32768;
        w = (row == 1) ? 65535 : int'($urandom_range(65535));
        token(row % 2 == 1 && j == 0, w, vv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
