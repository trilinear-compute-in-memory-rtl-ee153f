// tb_softmax_unit: random score vectors (and a constant one) through the
// default 64-element softmax. The reference recomputes the tables from their
// formulas with real arithmetic (exp: round(255*exp(-k/16)); reciprocal:
// floor(2^15/m)) and checks every probability and the 4-cycle latency. It
// also checks that probabilities sum to about 256 (1.0).
module tb_softmax_unit;
  import tcim_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [7:0] x [SEQ];
  logic [7:0] p [SEQ];
  softmax_unit dut (.clk, .rst_n, .in_valid, .x, .out_valid, .p);
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int mx, s, L, m, rcp, lat, tot;
      int e [SEQ];
      for (int i = 0; i < SEQ; i++) x[i] = (t == 0) ? 8'sd5 : (t == 1) ? 8'(i * 4 - 128) : 8'($urandom);
      @(negedge clk); in_valid = 1; @(negedge clk); in_valid = 0; lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++; if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
      mx = -128; for (int i = 0; i < SEQ; i++) if (int'(x[i]) > mx) mx = int'(x[i]);
      s = 0;
      for (int i = 0; i < SEQ; i++) begin e[i] = int'($floor(255.0 * $exp(-real'(mx - int'(x[i])) / 16.0) + 0.5)); s += e[i]; end
      L = 0; for (int b = 0; b < 20; b++) if (((s >> b) & 1) != 0) L = b;
      m = s >> (L - 7); rcp = 32768 / m;
      tot = 0;
      for (int i = 0; i < SEQ; i++) begin
        int q; q = (e[i] * rcp) >> L; if (q > 255) q = 255;
        checks++; tot += int'(p[i]);
        if (int'(p[i]) != q) begin failures++; $display("FAIL t=%0d i=%0d got %0d exp %0d", t, i, p[i], q); end
      end
      checks++;
      if (tot < 150 || tot > 300) begin failures++; $display("FAIL sum %0d", tot); end
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
