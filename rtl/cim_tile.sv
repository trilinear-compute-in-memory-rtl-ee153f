// cim_tile: a tile, a group of N_PE_P processing elements (2x2 in the paper's
// Fig. 3) with a tile input buffer and a tile accumulation and output buffer.
//
// The tile input buffer latches the row input x and the back-gate vector and
// broadcasts x to every PE; PE p receives the back-gate codes of its own
// subarrays, bg[p*N_ARR_P*NW_P +: N_ARR_P*NW_P]. arr_en selects the subarrays
// taking part, numbered PE-major (subarray a of PE p is bit p*N_ARR_P + a).
// When the PEs finish, the accumulation network adds their partial sums into
// y_sum and the output buffer holds all per-column results side by side in y,
// lane k = (p*N_ARR_P + a)*NW_P + j. Disabled subarrays give zero.
//
// What follows the paper: the PE grid, the tile input buffer that holds reused
// operands, the accumulation network and the tile output buffer. Design
// choices: the enable mask and the one-cycle buffer stages.
//
// Timing: done pulses 2*IN_BITS*(MUX+1)+5 cycles after start (149 at the
// defaults); y and y_sum hold until the next start.
module cim_tile
  import tcim_pkg::*;
#(
  parameter int unsigned N_PE_P  = N_PE,
  parameter int unsigned N_ARR_P = N_ARR,
  parameter int unsigned ROWS_P  = ROWS,
  parameter int unsigned COLS_P  = COLS,
  parameter int unsigned ADC_B   = ADC_BITS,
  parameter int unsigned ADC_SH  = ADC_SHIFT,
  parameter int unsigned Y_W     = 40
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  prog_en,
  input  logic [$clog2(N_PE_P*N_ARR_P)-1:0]     prog_arr,
  input  logic [$clog2(ROWS_P)-1:0]             prog_row,
  input  logic [$clog2(COLS_P/MUX)-1:0]         prog_wcol,
  input  logic signed [W_BITS-1:0]              prog_weight,
  input  logic                                  start,
  input  logic [N_PE_P*N_ARR_P-1:0]             arr_en,
  input  logic signed [IN_BITS-1:0]             x [ROWS_P],
  input  logic signed [BG_BITS-1:0]             bg [N_PE_P*N_ARR_P*(COLS_P/MUX)],
  input  bg_mode_e                              bg_mode,
  output logic                                  busy,
  output logic                                  done,
  output logic signed [Y_W-1:0]                 y [N_PE_P*N_ARR_P*(COLS_P/MUX)],
  output logic signed [Y_W-1:0]                 y_sum,
  output logic                                  adc_clip
);

  localparam int unsigned NWP   = COLS_P / MUX;
  localparam int unsigned PLANE = N_ARR_P * NWP;   // lanes per PE
  localparam int unsigned LANES = N_PE_P * PLANE;

  // tile input buffer
  logic signed [IN_BITS-1:0] x_q [ROWS_P];
  logic signed [BG_BITS-1:0] bg_q [LANES];
  bg_mode_e                  mode_q;
  logic [N_PE_P*N_ARR_P-1:0] en_q;
  logic [N_PE_P-1:0]         pe_en;
  logic                      go;
  logic                      running;

  logic [N_PE_P-1:0]         p_done, p_busy, p_clip;
  logic signed [Y_W-1:0]     p_y   [N_PE_P][PLANE];
  logic signed [Y_W-1:0]     p_sum [N_PE_P];

  for (genvar p = 0; p < int'(N_PE_P); p++) begin : g_pe
    logic signed [BG_BITS-1:0] bg_p [PLANE];
    for (genvar k = 0; k < int'(PLANE); k++) begin : g_bg
      assign bg_p[k] = bg_q[p * PLANE + k];
    end
    assign pe_en[p] = |en_q[p*N_ARR_P +: N_ARR_P];
    cim_pe #(.N_ARR_P(N_ARR_P), .ROWS_P(ROWS_P), .COLS_P(COLS_P), .ADC_B(ADC_B),
             .ADC_SH(ADC_SH), .Y_W(Y_W)) u_pe (
      .clk, .rst_n,
      .prog_en    (prog_en && (int'(prog_arr) / N_ARR_P) == p),
      .prog_arr   ($clog2(N_ARR_P)'(int'(prog_arr) % N_ARR_P)),
      .prog_row, .prog_wcol, .prog_weight,
      .start      (go && pe_en[p]),
      .arr_en     (en_q[p*N_ARR_P +: N_ARR_P]),
      .x          (x_q),
      .bg         (bg_p),
      .bg_mode    (mode_q),
      .busy       (p_busy[p]),
      .done       (p_done[p]),
      .y          (p_y[p]),
      .y_sum      (p_sum[p]),
      .adc_clip   (p_clip[p])
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
      for (int k = 0; k < int'(LANES); k++) begin
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
      end else if (running && !go && (p_done & pe_en) == pe_en) begin
        // tile accumulation network and output buffer
        logic signed [Y_W-1:0] s;
        s = '0;
        for (int p = 0; p < int'(N_PE_P); p++) begin
          for (int k = 0; k < int'(PLANE); k++) y[p * PLANE + k] <= pe_en[p] ? p_y[p][k] : '0;
          if (pe_en[p]) s += p_sum[p];
        end
        y_sum    <= s;
        adc_clip <= |(p_clip & pe_en);
        running  <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  a_mask: assert property (@(posedge clk) disable iff (!rst_n) (start && !running) |-> arr_en != '0);

endmodule
