// tb_layernorm_unit: random vectors with random gamma/beta through the default
// 64-element LayerNorm. The reference repeats the fixed-point recipe (floor
// mean, floor variance, inverse-sqrt entry round(4096/sqrt(m)) recomputed with
// real arithmetic) and checks every output and the 3*D+3 cycle latency; with
// gamma = 1.0 and beta = 0 it also checks the result against the real-valued
// normalisation within 2 LSB of Q2.5.
module tb_layernorm_unit;
  import tcim_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  logic start = 0, busy, done;
  logic signed [7:0] x [64], gamma [64], beta [64], y [64];
  layernorm_unit dut (.clk, .rst_n, .start, .x, .gamma, .beta, .busy, .done, .y);
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int s, mu, vs, vv, kk, isq, lat;
      real rm, rv;
      for (int k = 0; k < 64; k++) begin
        x[k] = (t == 0) ? 8'sd3 : (t == 1) ? 8'(k - 32) : 8'($urandom_range(0, 255));
        gamma[k] = (t < 4) ? 8'sd64 : 8'($urandom);
        beta[k]  = (t < 4) ? 8'sd0 : 8'($urandom);
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (lat - 1 != 3 * 64 + 3) begin failures++; $display("FAIL latency %0d", lat - 1); end
      s = 0; for (int k = 0; k < 64; k++) s += int'(x[k]);
      mu = s >>> 6;
      vs = 0; for (int k = 0; k < 64; k++) vs += (int'(x[k]) - mu) * (int'(x[k]) - mu);
      vv = vs / 64;
      kk = 0; while ((vv >> (2 * kk)) > 255) kk++;
      isq = ((vv >> (2 * kk)) == 0) ? 4095 : int'($floor(4096.0 / $sqrt(real'(vv >> (2 * kk))) + 0.5));
      if (isq > 4095) isq = 4095;
      rm = real'(s) / 64.0; rv = 0.0;
      for (int k = 0; k < 64; k++) rv += (real'(x[k]) - rm) ** 2;
      rv = rv / 64.0;
      for (int k = 0; k < 64; k++) begin
        int r, n, a;
        r = int'(x[k]) - mu;
        n = (r * isq) >>> (7 + kk);
        a = ((n * int'(gamma[k])) >>> 6) + int'(beta[k]);
        if (a > 127) a = 127; if (a < -128) a = -128;
        checks++;
        if (int'(y[k]) != a) begin failures++; $display("FAIL t=%0d k=%0d got %0d exp %0d", t, k, y[k], a); end
        if (t >= 1 && t < 4) begin
          real ideal; ideal = (real'(x[k]) - rm) / $sqrt(rv) * 32.0;
          if (ideal > 127.0) ideal = 127.0; if (ideal < -128.0) ideal = -128.0;
          checks++;
          if (fabs(real'(y[k]) - ideal) > 2.0 + fabs(ideal) * 0.03) begin failures++; $display("FAIL accuracy k=%0d y=%0d ideal=%f", k, y[k], ideal); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
