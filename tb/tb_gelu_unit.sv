// tb_gelu_unit: every INT8 input value through the default 64-lane GELU
// pipeline. The reference forms 1.703x by the same shift-add constant,
// recomputes the sigmoid table entry with real arithmetic and checks each
// lane and the 3-cycle latency; it also checks GELU(x) against x*sigmoid(1.702x)
// within 2 LSB.
module tb_gelu_unit;
  import tcim_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  logic in_valid = 0, out_valid;
  logic signed [7:0] x [64], y [64];
  gelu_unit dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int lat;
      for (int k = 0; k < 64; k++) x[k] = 8'(t * 64 + k);
      @(negedge clk); in_valid = 1; @(negedge clk); in_valid = 0; lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++; if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
      for (int k = 0; k < 64; k++) begin
        int xv, s, sg, e; real ideal;
        xv = int'(x[k]);
        s = (xv * 109) >>> 6; if (s > 127) s = 127; if (s < -128) s = -128;
        sg = int'($floor(256.0 / (1.0 + $exp(-real'(s) / 16.0)) + 0.5)); if (sg > 255) sg = 255;
        e = (xv * sg) >>> 8;
        checks++;
        if (int'(y[k]) != e) begin failures++; $display("FAIL x=%0d got %0d exp %0d", xv, y[k], e); end
        ideal = real'(xv) / (1.0 + $exp(-1.702 * real'(xv) / 16.0));
        checks++;
        if (fabs(real'(y[k]) - ideal) > 2.0) begin failures++; $display("FAIL accuracy x=%0d y=%0d ideal=%f", xv, y[k], ideal); end
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
