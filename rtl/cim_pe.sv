// cim_pe: processing element, a group of N_ARR_P subarrays (2x2 in the paper's
// Fig. 3) behind a PE input buffer and an accumulation and output buffer.
//
// All subarrays of a PE see the same row input x, latched in the input buffer,
// and each gets its own slice of the back-gate vector: subarray a receives
// bg[a*NW_P +: NW_P]. In configuration (a) every subarray holds a different
// block of weight columns of the same matrix and the PE adds the subarrays'
// intra-crossbar sums (local accumulation network); in configuration (b) and
// in the scaled-query stage the subarrays hold different output columns, and
// the PE simply places their per-column results side by side (y lanes).
// Subarrays whose bit in arr_en is clear are not started and contribute zero
// to both outputs, so unused subarrays can hold any weights.
//
// What follows the paper: the grid of arrays per PE, the shared input buffer,
// the accumulation of array outputs and the output buffer. Design choices: the
// enable mask and the one-cycle input and output buffer stages.
//
// Timing: start (while not busy) latches x, bg, bg_mode and arr_en; the
// subarrays start one cycle later; done pulses one cycle after they finish,
// i.e. 2*IN_BITS*(MUX+1)+3 cycles after start (147 at the defaults). y and
// y_sum hold until the next start. Programming addresses one subarray per cycle.
module cim_pe
  import tcim_pkg::*;
#(
  parameter int unsigned N_ARR_P = N_ARR,
  parameter int unsigned ROWS_P  = ROWS,
  parameter int unsigned COLS_P  = COLS,
  parameter int unsigned ADC_B   = ADC_BITS,
  parameter int unsigned ADC_SH  = ADC_SHIFT,
  parameter int unsigned Y_W     = 40
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               prog_en,
  input  logic [$clog2(N_ARR_P)-1:0]         prog_arr,
  input  logic [$clog2(ROWS_P)-1:0]          prog_row,
  input  logic [$clog2(COLS_P/MUX)-1:0]      prog_wcol,
  input  logic signed [W_BITS-1:0]           prog_weight,
  input  logic                               start,
  input  logic [N_ARR_P-1:0]                 arr_en,
  input  logic signed [IN_BITS-1:0]          x [ROWS_P],
  input  logic signed [BG_BITS-1:0]          bg [N_ARR_P*(COLS_P/MUX)],
  input  bg_mode_e                           bg_mode,
  output logic                               busy,
  output logic                               done,
  output logic signed [Y_W-1:0]              y [N_ARR_P*(COLS_P/MUX)],
  output logic signed [Y_W-1:0]              y_sum,
  output logic                               adc_clip
);

  localparam int unsigned NWP = COLS_P / MUX;

  // PE input buffer
  logic signed [IN_BITS-1:0] x_q [ROWS_P];
  logic signed [BG_BITS-1:0] bg_q [N_ARR_P*NWP];
  bg_mode_e                  mode_q;
  logic [N_ARR_P-1:0]        en_q;
  logic                      go;
  logic                      running;

  logic [N_ARR_P-1:0]        a_done, a_busy, a_clip;
  logic signed [Y_W-1:0]     a_y   [N_ARR_P][NWP];
  logic signed [Y_W-1:0]     a_sum [N_ARR_P];

  for (genvar a = 0; a < int'(N_ARR_P); a++) begin : g_arr
    logic signed [BG_BITS-1:0] bg_a [NWP];
    for (genvar j = 0; j < int'(NWP); j++) begin : g_bg
      assign bg_a[j] = bg_q[a * NWP + j];
    end
    cim_array #(.ROWS_P(ROWS_P), .COLS_P(COLS_P), .ADC_B(ADC_B), .ADC_SH(ADC_SH), .Y_W(Y_W)) u_arr (
      .clk, .rst_n,
      .prog_en    (prog_en && prog_arr == a[$clog2(N_ARR_P)-1:0]),
      .prog_row, .prog_wcol, .prog_weight,
      .start      (go && en_q[a]),
      .x          (x_q),
      .bg         (bg_a),
      .bg_mode    (mode_q),
      .busy       (a_busy[a]),
      .done       (a_done[a]),
      .y          (a_y[a]),
      .y_sum      (a_sum[a]),
      .adc_clip   (a_clip[a])
    );
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      go       <= 1'b0;
      running  <= 1'b0;
      done     <= 1'b0;
      mode_q   <= BG_PER_COLUMN;
      en_q     <= '0;
      y_sum    <= '0;
      adc_clip <= 1'b0;
      for (int r = 0; r < int'(ROWS_P); r++) x_q[r] <= '0;
      for (int k = 0; k < int'(N_ARR_P * NWP); k++) begin
        bg_q[k] <= '0;
        y[k]    <= '0;
      end
    end else begin
      go   <= 1'b0;
      done <= 1'b0;
      if (start && !running) begin
        x_q     <= x;
        bg_q    <= bg;
        mode_q  <= bg_mode;
        en_q    <= arr_en;
        go      <= 1'b1;
        running <= 1'b1;
      end else if (running && !go && (a_done & en_q) == en_q) begin
        // accumulation and output buffer
        logic signed [Y_W-1:0] s;
        s = '0;
        for (int a = 0; a < int'(N_ARR_P); a++) begin
          for (int j = 0; j < int'(NWP); j++) y[a * NWP + j] <= en_q[a] ? a_y[a][j] : '0;
          if (en_q[a]) s += a_sum[a];
        end
        y_sum    <= s;
        adc_clip <= |(a_clip & en_q);
        running  <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  // An empty enable mask would never finish.
  a_mask: assert property (@(posedge clk) disable iff (!rst_n) (start && !running) |-> arr_en != '0);

endmodule
