// tb_dgfefet_crossbar: checks the crossbar model's column currents against
// sum_r wl[r]*level[r][c]*(BG_ONE+bg[c]) computed here, for random levels,
// wordline patterns and back-gate codes, including masked programming (cells
// outside prog_col_en keep their level) and the clamp of negative modulation.
module tb_dgfefet_crossbar;
  import tcim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en = 0, sense = 0;
  logic [5:0] prog_row;
  logic [COLS-1:0] prog_col_en;
  logic [COLS-1:0][1:0] prog_level;
  logic [ROWS-1:0] wl;
  logic signed [BG_BITS-1:0] bg [COLS];
  logic [23:0] col_cur [COLS];
  int lv [ROWS][COLS];

  dgfefet_crossbar dut (.clk, .prog_en, .prog_row, .prog_col_en, .prog_level, .sense, .wl, .bg, .col_cur);

  initial begin
    #1000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); prog_en = 1; prog_row = 6'(r); prog_col_en = '1;
      for (int c = 0; c < COLS; c++) begin lv[r][c] = int'($urandom_range(0, 3)); prog_level[c] = 2'(lv[r][c]); end
    end
    // masked rewrite of even columns of row 5
    @(negedge clk); prog_row = 6'd5;
    for (int c = 0; c < COLS; c++) begin
      prog_col_en[c] = (c % 2 == 0); prog_level[c] = 2'(3 - lv[5][c]);
      if (c % 2 == 0) lv[5][c] = 3 - lv[5][c];
    end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < ROWS; r++) wl[r] = 1'($urandom_range(0, 1));
      for (int c = 0; c < COLS; c++) bg[c] = BG_BITS'(int'($urandom_range(0, 511)) - 256);
      if (t == 0) bg[0] = -9'sd256;
      sense = 1; @(negedge clk); sense = 0;
      for (int c = 0; c < COLS; c++) begin
        int g, m;
        g = 0;
        for (int r = 0; r < ROWS; r++) if (wl[r]) g += lv[r][c];
        m = 256 + int'(bg[c]); if (m < 0) m = 0;
        checks++;
        if (int'(col_cur[c]) != g * m) begin
          failures++; $display("FAIL t=%0d c=%0d got %0d exp %0d", t, c, col_cur[c], g * m);
        end
      end
      // currents hold while sense is low
      wl = ~wl; @(negedge clk);
      checks++;
      begin
        int g; g = 0;
        for (int r = 0; r < ROWS; r++) if (!wl[r]) g += lv[r][1];
        if (int'(col_cur[1]) != g * (256 + int'(bg[1]) < 0 ? 0 : 256 + int'(bg[1]))) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
