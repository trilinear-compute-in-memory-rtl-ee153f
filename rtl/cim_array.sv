// cim_array: one DG-FeFET subarray with its readout: column multiplexer,
// shared ADCs, digital adders and shift registers. It performs one trilinear
// multiply-accumulate per operation:
//     y[j] = sum_r x[r] * W[r][j] * bg_j          (j = 0 .. NW_P-1)
// in the units of the ADC (see below), and also returns the intra-crossbar
// sum y_sum = sum_j y[j] used by configuration (a) of the paper.
//
// How it works. A signed W_B-bit weight is held as two magnitudes, a positive
// and a negative one (a differential pair, design choice), each split into
// SLICES cells of CELL_B bits. Weight column j occupies the MUX_P adjacent
// physical columns j*MUX_P .. j*MUX_P+MUX_P-1: first the SLICES positive
// slices (LSB first), then the SLICES negative slices. So ADC j, which the
// MUX_P:1 multiplexer shares over those columns, reads exactly one weight
// column, and its adder recombines the slices with shifts of CELL_B*s and the
// sign of the polarity (the paper's shift-add, output = sum partial_s *
// 2^(s*b_cell)).
// The row input x is applied bit-serially, LSB first; the last bit is the
// two's-complement sign bit and is subtracted. For every input bit the array
// is read twice under the same wordline pattern: a reference read with all
// back-gate codes at zero, which measures the V_DS*G0 term, and the modulated
// read. The shift register adds (modulated - reference) << bit, which removes
// the DC term of I = V_DS*G0*(1 + eta*V_BG) as the paper describes.
// In bg_mode BG_PER_COLUMN (configuration (a)) weight column j gets bg[j]; in
// BG_BROADCAST (configuration (b), and the static scaling of stage 1) every
// column gets bg[0].
//
// Units: with the default ADC LSB (one level-1 cell at zero back-gate bias,
// ADC_SHIFT = log2(BG_ONE)), y[j] approximates x.W.bg / BG_ONE, each ADC
// reading rounded down and clipped at full scale. With ADC_SHIFT = 0 and a wide
// enough ADC the result is exact x.W.bg.
//
// Timing: `start` (while not busy) latches x, bg and bg_mode. Each of the
// 2*IN_B reads takes one sense cycle plus MUX_P conversion cycles, then one
// cycle finishes: done pulses LATENCY = 2*IN_B*(MUX_P+1)+1 cycles after start
// (145 at the defaults), with y and y_sum valid from then until the next start.
// Weights are written one weight (row, column) per cycle through prog_*;
// programming and reads must not overlap.
module cim_array
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS_P    = ROWS,
  parameter int unsigned COLS_P    = COLS,
  parameter int unsigned CELL_B    = CELL_BITS,
  parameter int unsigned W_B       = W_BITS,
  parameter int unsigned IN_B      = IN_BITS,
  parameter int unsigned ADC_B     = ADC_BITS,
  parameter int unsigned ADC_SH    = ADC_SHIFT,
  parameter int unsigned MUX_P     = MUX,
  parameter int unsigned BG_B      = BG_BITS,
  parameter int unsigned BG_ONE_P  = BG_ONE,
  parameter int unsigned Y_W       = 40
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // weight programming
  input  logic                              prog_en,
  input  logic [$clog2(ROWS_P)-1:0]         prog_row,
  input  logic [$clog2(COLS_P/MUX_P)-1:0]   prog_wcol,
  input  logic signed [W_B-1:0]             prog_weight,
  // trilinear read
  input  logic                              start,
  input  logic signed [IN_B-1:0]            x [ROWS_P],
  input  logic signed [BG_B-1:0]            bg [COLS_P/MUX_P],
  input  bg_mode_e                          bg_mode,
  output logic                              busy,
  output logic                              done,
  output logic signed [Y_W-1:0]             y [COLS_P/MUX_P],
  output logic signed [Y_W-1:0]             y_sum,
  output logic                              adc_clip   // an ADC clipped during the last operation
);

  localparam int unsigned SL   = W_B / CELL_B;
  localparam int unsigned NWP  = COLS_P / MUX_P;
  localparam int unsigned CUR_W = 24;

  // The column layout needs one ADC per weight column.
  if (MUX_P != 2 * SL) begin : g_bad_mux
    $error("cim_array: MUX_P must equal 2*W_B/CELL_B");
  end

  // ---------------- weight programming (CL / V_TG) ----------------
  logic [COLS_P-1:0]             pcol_en;
  logic [COLS_P-1:0][CELL_B-1:0] plevel;

  always_comb begin
    logic [W_B-1:0] pos, neg;
    pos = prog_weight >= 0 ? W_B'(prog_weight) : '0;
    neg = prog_weight <  0 ? W_B'(-prog_weight) : '0;  // -(-2^(W_B-1)) wraps to 2^(W_B-1): still correct unsigned
    pcol_en = '0;
    plevel  = '0;
    for (int s = 0; s < int'(SL); s++) begin
      pcol_en[int'(prog_wcol) * MUX_P + s]      = 1'b1;
      pcol_en[int'(prog_wcol) * MUX_P + SL + s] = 1'b1;
      plevel[int'(prog_wcol) * MUX_P + s]       = pos[s*CELL_B +: CELL_B];
      plevel[int'(prog_wcol) * MUX_P + SL + s]  = neg[s*CELL_B +: CELL_B];
    end
  end

  // ---------------- read sequencing ----------------
  typedef enum logic [1:0] {S_IDLE, S_SENSE, S_CONV, S_FIN} state_e;
  state_e state;

  logic [$clog2(IN_B)-1:0]  bit_idx;
  logic                     phase;      // 0: reference read, 1: modulated read
  logic [$clog2(MUX_P)-1:0] step;

  logic signed [IN_B-1:0]   x_q  [ROWS_P];
  logic signed [BG_B-1:0]   bg_q [NWP];
  bg_mode_e                 mode_q;

  logic [ROWS_P-1:0]        wl;
  logic signed [BG_B-1:0]   bgl [COLS_P];
  logic [CUR_W-1:0]         col_cur [COLS_P];

  always_comb begin
    for (int r = 0; r < int'(ROWS_P); r++) wl[r] = x_q[r][bit_idx];
    for (int c = 0; c < int'(COLS_P); c++) begin
      if (!phase)                     bgl[c] = '0;
      else if (mode_q == BG_BROADCAST) bgl[c] = bg_q[0];
      else                            bgl[c] = bg_q[c / MUX_P];
    end
  end

  dgfefet_crossbar #(
    .ROWS_P(ROWS_P), .COLS_P(COLS_P), .CELL_B(CELL_B), .BG_B(BG_B),
    .BG_ONE_P(BG_ONE_P), .CUR_W(CUR_W)
  ) u_xbar (
    .clk        (clk),
    .prog_en    (prog_en),
    .prog_row   (prog_row),
    .prog_col_en(pcol_en),
    .prog_level (plevel),
    .sense      (state == S_SENSE),
    .wl         (wl),
    .bg         (bgl),
    .col_cur    (col_cur)
  );

  // ---------------- MUX -> ADC per weight column ----------------
  logic [ADC_B-1:0] code [NWP];
  logic [NWP-1:0]   clip;

  for (genvar j = 0; j < int'(NWP); j++) begin : g_adc
    adc_model #(.CUR_W(CUR_W), .ADC_B(ADC_B), .LSB_SHIFT(ADC_SH)) u_adc (
      .cur (col_cur[j * MUX_P + int'(step)]),
      .code(code[j]),
      .clip(clip[j])
    );
  end

  // ---------------- adders and shift registers ----------------
  logic signed [Y_W-1:0] part [NWP];   // slice-recombined reading of the current read
  logic signed [Y_W-1:0] ref_q [NWP];  // reference reading of the current input bit

  always_comb begin
    y_sum = '0;
    for (int j = 0; j < int'(NWP); j++) y_sum += y[j];
  end

  assign busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bit_idx  <= '0;
      phase    <= 1'b0;
      step     <= '0;
      done     <= 1'b0;
      adc_clip <= 1'b0;
      mode_q   <= BG_PER_COLUMN;
      for (int j = 0; j < int'(NWP); j++) begin
        y[j]     <= '0;
        part[j]  <= '0;
        ref_q[j] <= '0;
        bg_q[j]  <= '0;
      end
      for (int r = 0; r < int'(ROWS_P); r++) x_q[r] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            x_q      <= x;
            bg_q     <= bg;
            mode_q   <= bg_mode;
            bit_idx  <= '0;
            phase    <= 1'b0;
            adc_clip <= 1'b0;
            for (int j = 0; j < int'(NWP); j++) y[j] <= '0;
            state    <= S_SENSE;
          end
        end
        S_SENSE: begin
          step <= '0;
          for (int j = 0; j < int'(NWP); j++) part[j] <= '0;
          state <= S_CONV;
        end
        S_CONV: begin
          for (int j = 0; j < int'(NWP); j++) begin
            logic signed [Y_W-1:0] term;
            logic signed [Y_W-1:0] nxt;
            term = Y_W'(code[j]) <<< (CELL_B * (int'(step) % SL));
            nxt  = (int'(step) < int'(SL)) ? part[j] + term : part[j] - term;
            part[j] <= nxt;
            if (int'(step) == int'(MUX_P) - 1) begin
              if (!phase) ref_q[j] <= nxt;
              else begin
                logic signed [Y_W-1:0] diff;
                diff = (nxt - ref_q[j]) <<< bit_idx;
                y[j] <= (int'(bit_idx) == int'(IN_B) - 1) ? y[j] - diff : y[j] + diff;
              end
            end
          end
          if (|clip) adc_clip <= 1'b1;
          if (int'(step) == int'(MUX_P) - 1) begin
            if (!phase) begin
              phase <= 1'b1;
              state <= S_SENSE;
            end else if (int'(bit_idx) == int'(IN_B) - 1) begin
              state <= S_FIN;
            end else begin
              phase   <= 1'b0;
              bit_idx <= bit_idx + 1'b1;
              state   <= S_SENSE;
            end
          end else begin
            step <= step + 1'b1;
          end
        end
        S_FIN: begin
          phase <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new operation may only start while the array is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // Weights are not rewritten during a read.
  a_prog_idle: assert property (@(posedge clk) disable iff (!rst_n) prog_en |-> !busy);

endmodule
