// tb_global_buffer: writes random words at random addresses of the default
// 4 MB buffer, reads them back (one-cycle read latency) and checks them.
module tb_global_buffer;
  import tcim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, we = 0;
  logic [15:0] addr;
  logic [511:0] wdata, rdata;
  logic [511:0] ref_m [int];
  global_buffer dut (.clk, .en, .we, .addr, .wdata, .rdata);
  function automatic logic [511:0] rnd();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    int a [64];
    for (int i = 0; i < 64; i++) begin
      a[i] = (i == 0) ? 0 : (i == 1) ? 65535 : int'($urandom_range(0, 65535));
      @(negedge clk); en = 1; we = 1; addr = 16'(a[i]); wdata = rnd(); ref_m[a[i]] = wdata;
    end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); en = 1; we = 0; addr = 16'(a[i]);
      @(negedge clk); en = 0;
      checks++;
      if (rdata != ref_m[a[i]]) begin failures++; $display("FAIL addr %0d", a[i]); end
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
