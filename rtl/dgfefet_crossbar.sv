// dgfefet_crossbar: behavioural model of one selector-less DG-FeFET crossbar
// subarray, with its WL/CL switch matrix (rows) and BGL/SL switch matrix and
// back-gate DACs (columns). This is not synthesizable hardware in the usual
// sense: the cells, the DACs and the analog current summation are analog and
// are modelled here with integers.
//
// Each cell stores a CELL_BITS-bit conductance level G0 in its ferroelectric
// top gate. A read applies a binary drain voltage on each wordline (one bit of
// the row input, bit-serial) and a back-gate DAC code on each column. Following
// the first-order device law I = V_DS * G0 * (1 + eta * V_BG), the source-line
// current of column c is modelled as
//     cur[c] = sum_r wl[r] * level[r][c] * (BG_ONE + bg[c])
// where BG_ONE is the DAC code that stands for the "1" of the device law, so
// one current unit is (level-1 cell, V_BG = 0) / BG_ONE. A negative
// (BG_ONE + bg) is clamped at zero: a cell cannot conduct backwards.
//
// What follows the paper: cells on the top gate hold the weight, rows carry the
// input, columns carry the back-gate operand, column currents sum by
// Kirchhoff's law, and cells are written through the control line (V_TG).
// Design choices: the integer current unit, the clamp at zero, treating the
// conductance band [29, 69] uS as a linear map of levels starting at zero
// (the band offset is not modelled), and the band-averaged eta is folded into
// the DAC code scale.
//
// Interface and timing:
//   prog_en      writes prog_level[c] into row prog_row for every column c with
//                prog_col_en[c] set, at the clock edge (a V_TG write pulse).
//   sense        samples the column currents for the present wl/bg into
//                col_cur at the clock edge; col_cur holds until the next sense.
module dgfefet_crossbar
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS_P    = ROWS,
  parameter int unsigned COLS_P    = COLS,
  parameter int unsigned CELL_B    = CELL_BITS,
  parameter int unsigned BG_B      = BG_BITS,
  parameter int unsigned BG_ONE_P  = BG_ONE,
  parameter int unsigned CUR_W     = 24
) (
  input  logic                            clk,
  // CL / V_TG programming
  input  logic                            prog_en,
  input  logic [$clog2(ROWS_P)-1:0]       prog_row,
  input  logic [COLS_P-1:0]               prog_col_en,
  input  logic [COLS_P-1:0][CELL_B-1:0]   prog_level,
  // read: WL drain bits and BGL DAC codes
  input  logic                            sense,
  input  logic [ROWS_P-1:0]               wl,
  input  logic signed [BG_B-1:0]          bg [COLS_P],
  // SL currents
  output logic [CUR_W-1:0]                col_cur [COLS_P]
);

  logic [CELL_B-1:0] level [ROWS_P][COLS_P];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < int'(COLS_P); c++) begin
        if (prog_col_en[c]) level[prog_row][c] <= prog_level[c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (sense) begin
      for (int c = 0; c < int'(COLS_P); c++) begin
        int g;
        int mod;
        g = 0;
        for (int r = 0; r < int'(ROWS_P); r++) begin
          if (wl[r]) g += int'(level[r][c]);
        end
        mod = int'(BG_ONE_P) + int'(bg[c]);
        if (mod < 0) mod = 0;
        col_cur[c] <= CUR_W'(g * mod);
      end
    end
  end

endmodule
