// tb_adc_model: checks the ADC transfer function (floor(cur / 2^LSB_SHIFT),
// clipped at 2^ADC_BITS - 1, clip flag) at the defaults over edge and random
// currents.
module tb_adc_model;
  import tcim_pkg::*;
  int checks = 0, failures = 0;
  logic [23:0] cur;
  logic [7:0] code;
  logic clip;
  adc_model dut (.cur, .code, .clip);
  initial begin
    int vals [8] = '{0, 255, 256, 65279, 65280, 65535, 65536, 16777215};
    for (int t = 0; t < 208; t++) begin
      int e; bit ec;
      cur = (t < 8) ? 24'(vals[t]) : 24'($urandom_range(0, 100000));
      #1;
      e = int'(cur) >> 8; ec = e > 255; if (ec) e = 255;
      checks++;
      if (int'(code) != e || clip != ec) begin failures++; $display("FAIL cur=%0d code=%0d clip=%0d", cur, code, clip); end
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
