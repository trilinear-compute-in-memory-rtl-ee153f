// tb_accum_unit: random adds from two inputs, clears (also together with add),
// checked against a running sum kept here.
module tb_accum_unit;
  import tcim_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear = 0, add = 0;
  logic signed [39:0] in_v [2][64];
  logic signed [47:0] acc [64];
  longint model [64];
  accum_unit dut (.clk, .rst_n, .clear, .add, .in_v, .acc);
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int k = 0; k < 64; k++) model[k] = 0;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      clear = ($urandom_range(0, 9) == 0); add = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < 2; i++) for (int k = 0; k < 64; k++) in_v[i][k] = 40'(longint'($urandom) - 64'sd2147483648);
      for (int k = 0; k < 64; k++) begin
        if (clear) model[k] = 0;
        else if (add) model[k] += longint'(in_v[0][k]) + longint'(in_v[1][k]);
      end
      @(negedge clk); clear = 0; add = 0;
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (longint'(acc[k]) != model[k]) begin failures++; $display("FAIL t=%0d k=%0d", t, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
