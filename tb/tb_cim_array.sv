// tb_cim_array: self-checking testbench of the subarray with its readout.
//
// Two instances are checked against a reference written independently of the
// RTL. u_exact is a small subarray (16 rows, 4 weight columns) with an ADC
// wide enough and an LSB of one current unit, so its result must equal the
// exact trilinear product sum_r x[r]*W[r][j]*bg_j. u_def uses every default
// (64x64, 8-bit ADC whose LSB is one level-1 ce at zero back-gate bias); its
// reference repeats the per-bit reference/modulated reads with ADC rounding
// and clipping. Both back-gate modes, signed inputs and weights including
// -128 are exercised, and the latency 2*IN_BITS*(MUX+1)+1 is checked.
module tb_cim_array;
  import tcim_pkg::*;

  localparam int ER = 16, EC = 32, ENW = EC / MUX;
  localparam int DNW = COLS / MUX;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- exact instance ----------------
  logic e_prog_en = 0; logic [$clog2(ER)-1:0] e_prow; logic [$clog2(ENW)-1:0] e_pcol;
  logic signed [7:0] e_pw;
  logic e_start = 0; logic signed [7:0] e_x [ER]; logic signed [BG_BITS-1:0] e_bg [ENW];
  bg_mode_e e_mode; logic e_busy, e_done, e_clip;
  logic signed [39:0] e_y [ENW]; logic signed [39:0] e_ysum;

  cim_array #(.ROWS_P(ER), .COLS_P(EC), .ADC_B(20), .ADC_SH(0)) u_exact (
    .clk, .rst_n, .prog_en(e_prog_en), .prog_row(e_prow), .prog_wcol(e_pcol), .prog_weight(e_pw),
    .start(e_start), .x(e_x), .bg(e_bg), .bg_mode(e_mode), .busy(e_busy), .done(e_done),
    .y(e_y), .y_sum(e_ysum), .adc_clip(e_clip));

  // ---------------- default instance ----------------
  logic d_prog_en = 0; logic [$clog2(ROWS)-1:0] d_prow; logic [$clog2(DNW)-1:0] d_pcol;
  logic signed [7:0] d_pw;
  logic d_start = 0; logic signed [7:0] d_x [ROWS]; logic signed [BG_BITS-1:0] d_bg [DNW];
  bg_mode_e d_mode; logic d_busy, d_done, d_clip;
  logic signed [39:0] d_y [DNW]; logic signed [39:0] d_ysum;

  cim_array u_def (
    .clk, .rst_n, .prog_en(d_prog_en), .prog_row(d_prow), .prog_wcol(d_pcol), .prog_weight(d_pw),
    .start(d_start), .x(d_x), .bg(d_bg), .bg_mode(d_mode), .busy(d_busy), .done(d_done),
    .y(d_y), .y_sum(d_ysum), .adc_clip(d_clip));

  int ew [ER][ENW];
  int dw [ROWS][DNW];

  // Quantized reference of one weight column: per input bit, a reference read
  // and a modulated read of all 2*SLICES cells, each through the ADC.
  function automatic longint ref_col(int nrows, int wcol, bit is_def, int bgv, int lsb, int adcb,
                                     output bit clipped);
    longint y;
    y = 0;
    clipped = 0;
    for (int b = 0; b < 8; b++) begin
      longint rd [2];
      for (int ph = 0; ph < 2; ph++) begin
        longint acc;
        acc = 0;
        for (int ce = 0; ce < 8; ce++) begin
          int sl; longint cur; longint code; longint full;
          sl = ce % 4; cur = 0;
          for (int r = 0; r < nrows; r++) begin
            int w, xv, mag, lvl;
            w = is_def ? dw[r][wcol] : ew[r][wcol];
            xv = is_def ? int'(d_x[r]) : int'(e_x[r]);
            mag = (ce < 4) ? (w > 0 ? w : 0) : (w < 0 ? -w : 0);
            lvl = (mag >> (2 * sl)) & 3;
            if (((xv >> b) & 1) != 0) cur += lvl;
          end
          cur = cur * longint'(int'(BG_ONE) + (ph == 1 ? bgv : 0));
          full = (longint'(1) << adcb) - 1;
          code = cur >> lsb;
          if (code > full) begin code = full; clipped = 1; end
          acc += (ce < 4 ? code : -code) << (2 * sl);
        end
        rd[ph] = acc;
      end
      if (b == 7) y -= (rd[1] - rd[0]) << b; else y += (rd[1] - rd[0]) << b;
    end
    return y;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- program random weights (exact instance includes -128 and 127) ----
    for (int r = 0; r < ER; r++)
      for (int j = 0; j < ENW; j++) begin
        ew[r][j] = (r == 0 && j == 0) ? -128 : (r == 1 && j == 0) ? 127 : int'($urandom_range(0, 255)) - 128;
        @(negedge clk); e_prog_en = 1; e_prow = r[$clog2(ER)-1:0]; e_pcol = j[$clog2(ENW)-1:0]; e_pw = 8'(ew[r][j]);
      end
    @(negedge clk); e_prog_en = 0;
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < DNW; j++) begin
        dw[r][j] = int'($urandom_range(0, 255)) - 128;
        @(negedge clk); d_prog_en = 1; d_prow = r[$clog2(ROWS)-1:0]; d_pcol = j[$clog2(DNW)-1:0]; d_pw = 8'(dw[r][j]);
      end
    @(negedge clk); d_prog_en = 0;

    // ---- exact instance: trilinear product, both modes ----
    for (int t = 0; t < 6; t++) begin
      for (int r = 0; r < ER; r++) e_x[r] = (t == 0 && r == 0) ? -8'sd128 : 8'($urandom_range(0, 255));
      for (int j = 0; j < ENW; j++) e_bg[j] = BG_BITS'(int'($urandom_range(0, 510)) - 255);
      e_mode = (t % 2 == 0) ? BG_PER_COLUMN : BG_BROADCAST;
      @(negedge clk); e_start = 1; @(negedge clk); e_start = 0;
      lat = 1;
      while (!e_done) begin @(negedge clk); lat++; end
      check("exact latency", lat - 1, 2 * 8 * (MUX + 1) + 1);
      begin
        automatic longint s = 0;
        for (int j = 0; j < ENW; j++) begin
          automatic longint exp = 0;
          automatic int bgv = (e_mode == BG_BROADCAST) ? int'(e_bg[0]) : int'(e_bg[j]);
          for (int r = 0; r < ER; r++) exp += longint'(e_x[r]) * ew[r][j] * bgv;
          check($sformatf("exact y[%0d] t=%0d", j, t), e_y[j], exp);
          s += exp;
        end
        check("exact y_sum", e_ysum, s);
      end
    end

    // ---- default instance: quantized ADC model ----
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < ROWS; r++) d_x[r] = 8'($urandom_range(0, 255));
      for (int j = 0; j < DNW; j++) d_bg[j] = BG_BITS'(int'($urandom_range(0, 510)) - 255);
      // test 3: sparse input so no ADC clips
      if (t == 3) for (int r = 0; r < ROWS; r++) d_x[r] = (r < 4) ? 8'(r + 1) : 8'sd0;
      d_mode = (t % 2 == 0) ? BG_PER_COLUMN : BG_BROADCAST;
      @(negedge clk); d_start = 1; @(negedge clk); d_start = 0;
      while (!d_done) @(negedge clk);
      begin
        automatic bit any_clip = 0;
        automatic longint s = 0;
        for (int j = 0; j < DNW; j++) begin
          automatic bit c;
          automatic int bgv = (d_mode == BG_BROADCAST) ? int'(d_bg[0]) : int'(d_bg[j]);
          automatic longint exp = ref_col(ROWS, j, 1, bgv, ADC_SHIFT, ADC_BITS, c);
          any_clip |= c;
          check($sformatf("default y[%0d] t=%0d", j, t), d_y[j], exp);
          s += exp;
        end
        check("default y_sum", d_ysum, s);
        check("default clip flag", longint'(d_clip), longint'(any_clip));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
