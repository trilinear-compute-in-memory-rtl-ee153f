// layernorm_unit: LayerNorm of one D_P-element INT8 vector with learned
// per-element scale gamma and bias beta, as a two-pass pipeline followed by
// an affine stage (the paper's organisation), one element per cycle:
//   pass 1: sum the elements; mu = floor(sum / D_P) (fixed-point division);
//   pass 2: r_i = x_i - mu, accumulate r_i^2; var = floor(sum / D_P);
//           an inverse-square-root table gives 1/sqrt(var);
//   pass 3: n_i = r_i / sqrt(var) in Q2.5, then y_i = sat8(n_i*gamma_i/64 + beta_i).
// The table is indexed by an 8-bit mantissa: var = m * 4^k with m < 256, so
// 1/sqrt(var) = inv_sqrt_lut[m] * 2^-(12+k) with inv_sqrt_lut[m] =
// min(4095, round(4096/sqrt(m))) (m = 0 reads 4095). Formats (design choices):
// gamma is Q1.6 (64 = 1.0), beta and y are Q2.5.
// Timing: start latches x, gamma and beta; done pulses after 3*D_P+3 cycles
// with y valid until the next start.
module layernorm_unit
  import tcim_pkg::*;
#(
  parameter int unsigned D_P = D_MODEL
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [7:0]        x     [D_P],
  input  logic signed [7:0]        gamma [D_P],
  input  logic signed [7:0]        beta  [D_P],
  output logic                     busy,
  output logic                     done,
  output logic signed [7:0]        y     [D_P]
);
  logic [11:0] isq_lut [256];
  initial $readmemh("rtl/inv_sqrt_lut.mem", isq_lut);

  typedef enum logic [2:0] {L_IDLE, L_MEAN, L_MU, L_VAR, L_ISQ, L_NORM, L_DONE} lstate_e;
  lstate_e st;

  logic signed [7:0]  xq [D_P], gq [D_P], bq [D_P];
  logic [$clog2(D_P)-1:0] i;
  logic signed [31:0] acc;
  logic signed [15:0] mu;
  logic [11:0]        isq;
  logic [4:0]         k;

  assign busy = st != L_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; i <= '0; acc <= '0; mu <= '0; isq <= '0; k <= '0; done <= 1'b0;
      for (int n = 0; n < int'(D_P); n++) begin
        xq[n] <= '0; gq[n] <= '0; bq[n] <= '0; y[n] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        L_IDLE: if (start) begin
          xq <= x; gq <= gamma; bq <= beta; acc <= '0; i <= '0; st <= L_MEAN;
        end
        L_MEAN: begin                       // pass 1
          acc <= acc + 32'(xq[i]);
          if (int'(i) == int'(D_P) - 1) st <= L_MU; else i <= i + 1'b1;
        end
        L_MU: begin                         // fixed-point division
          logic signed [31:0] q;
          q = acc / $signed(32'(D_P));
          if (acc < 0 && q * $signed(32'(D_P)) != acc) q = q - 1;  // floor
          mu <= 16'(q); acc <= '0; i <= '0; st <= L_VAR;
        end
        L_VAR: begin                        // pass 2
          logic signed [31:0] r;
          r = 32'(xq[i]) - 32'(mu);
          acc <= acc + r * r;
          if (int'(i) == int'(D_P) - 1) st <= L_ISQ; else i <= i + 1'b1;
        end
        L_ISQ: begin                        // variance and inverse-sqrt table
          logic [31:0] vv;
          int unsigned kk;
          vv = 32'(acc) / 32'(D_P);
          kk = 0;
          while ((vv >> (2 * kk)) > 32'd255) kk++;
          k     <= 5'(kk);
          isq   <= isq_lut[8'(vv >> (2 * kk))];
          i     <= '0;
          st    <= L_NORM;
        end
        L_NORM: begin                       // normalise and affine
          logic signed [31:0] r, n, a;
          r = 32'(xq[i]) - 32'(mu);
          n = (r * $signed({20'd0, isq})) >>> (7 + k);     // Q2.5
          a = ((n * 32'(gq[i])) >>> 6) + 32'(bq[i]);
          y[i] <= 8'(sat_s(64'(a), 8));
          if (int'(i) == int'(D_P) - 1) st <= L_DONE; else i <= i + 1'b1;
        end
        L_DONE: begin
          done <= 1'b1; st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
