// tb_cim_pe: a PE of four small subarrays (16 rows, 2 weight columns each)
// with an exact ADC setting. Random weights, inputs, back-gate codes and
// enable masks, both back-gate modes; every lane must equal the exact
// trilinear product x.W.bg of its subarray (zero when disabled), y_sum the sum
// of the enabled subarrays, and done must come 2*8*(8+1)+3 cycles after start.
module tb_cim_pe;
  import tcim_pkg::*;
  localparam int R = 16, C = 16, NWL = C / MUX, NA = 4, L = NA * NWL;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic prog_en = 0; logic [1:0] prog_arr; logic [3:0] prog_row; logic [0:0] prog_wcol; logic signed [7:0] prog_weight;
  logic start = 0; logic [NA-1:0] arr_en; logic signed [7:0] x [R]; logic signed [BG_BITS-1:0] bg [L];
  bg_mode_e bg_mode; logic busy, done, adc_clip; logic signed [39:0] y [L]; logic signed [39:0] y_sum;
  int w [NA][R][NWL];
  cim_pe #(.N_ARR_P(NA), .ROWS_P(R), .COLS_P(C), .ADC_B(20), .ADC_SH(0)) dut (
    .clk, .rst_n, .prog_en, .prog_arr, .prog_row, .prog_wcol, .prog_weight, .start, .arr_en, .x, .bg,
    .bg_mode, .busy, .done, .y, .y_sum, .adc_clip);
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int a = 0; a < NA; a++) for (int r = 0; r < R; r++) for (int j = 0; j < NWL; j++) begin
      w[a][r][j] = int'($urandom_range(0, 255)) - 128;
      @(negedge clk); prog_en = 1; prog_arr = 2'(a); prog_row = 4'(r); prog_wcol = 1'(j); prog_weight = 8'(w[a][r][j]);
    end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 8; t++) begin
      int lat; longint s;
      arr_en = (t == 0) ? 4'hF : 4'($urandom_range(1, 15));
      bg_mode = (t % 2) ? BG_BROADCAST : BG_PER_COLUMN;
      for (int r = 0; r < R; r++) x[r] = 8'($urandom);
      for (int k = 0; k < L; k++) bg[k] = BG_BITS'(int'($urandom_range(0, 510)) - 255);
      @(negedge clk); start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (lat - 1 != 2 * 8 * (MUX + 1) + 3) begin failures++; $display("FAIL latency %0d", lat - 1); end
      s = 0;
      for (int a = 0; a < NA; a++) for (int j = 0; j < NWL; j++) begin
        longint e; int b;
        e = 0;
        b = (bg_mode == BG_BROADCAST) ? int'(bg[a * NWL]) : int'(bg[a * NWL + j]);
        for (int r = 0; r < R; r++) e += longint'(x[r]) * w[a][r][j] * b;
        if (!arr_en[a]) e = 0;
        s += e;
        checks++;
        if (longint'(y[a * NWL + j]) != e) begin failures++; $display("FAIL t=%0d a=%0d j=%0d got %0d exp %0d", t, a, j, y[a*NWL+j], e); end
      end
      checks++; if (longint'(y_sum) != s) begin failures++; $display("FAIL sum t=%0d", t); end
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
