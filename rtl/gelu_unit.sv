// gelu_unit: GELU activation of LANES INT8 values in parallel, using the
// sigmoid approximation GELU(x) ~ x * sigmoid(1.702 x).
//
// Three pipeline stages, as in the paper: (1) a shift-and-add scaler forms
// 1.702x as (64x + 32x + 8x + 4x + x) / 64 = 1.703x, saturated to INT8;
// (2) a 256-entry sigmoid table maps it to sigmoid(.) in units of 1/256;
// (3) a multiplier forms x * sigmoid >> 8. Values are signed Q3.4 (4
// fractional bits, design choice); the table entry for code s is
// min(255, round(256 / (1 + exp(-s/16)))).
// Timing: in_valid/x enter at one edge; out_valid/y appear 3 cycles later;
// one vector per cycle.
module gelu_unit
  import tcim_pkg::*;
#(
  parameter int unsigned LANES = D_MODEL
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [7:0]        x [LANES],
  output logic                     out_valid,
  output logic signed [7:0]        y [LANES]
);
  logic [7:0] sig_lut [256];
  initial $readmemh("rtl/sigmoid_lut.mem", sig_lut);

  logic [2:0]        v;
  logic signed [7:0] x1 [LANES], x2 [LANES];
  logic signed [7:0] s1 [LANES];
  logic [7:0]        g2 [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int k = 0; k < int'(LANES); k++) begin
        x1[k] <= '0; x2[k] <= '0; s1[k] <= '0; g2[k] <= '0; y[k] <= '0;
      end
    end else begin
      v <= {v[1:0], in_valid};
      for (int k = 0; k < int'(LANES); k++) begin
        logic signed [15:0] t;
        logic signed [15:0] p;
        // stage 1: shift-and-add scaler
        t = ((16'(x[k]) <<< 6) + (16'(x[k]) <<< 5) + (16'(x[k]) <<< 3) + (16'(x[k]) <<< 2) + 16'(x[k])) >>> 6;
        s1[k] <= 8'(sat_s(64'(t), 8));
        x1[k] <= x[k];
        // stage 2: sigmoid table
        g2[k] <= sig_lut[s1[k]];
        x2[k] <= x1[k];
        // stage 3: multiplier
        p = (16'(x2[k]) * $signed({8'd0, g2[k]})) >>> 8;
        y[k] <= 8'(p);
      end
    end
  end
  assign out_valid = v[2];
endmodule
