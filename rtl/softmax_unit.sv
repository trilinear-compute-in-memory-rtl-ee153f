// softmax_unit: softmax over a vector of SEQ_P attention scores, in the
// paper's four pipeline stages:
//   1. a comparator tree finds x_max;
//   2. a 256-entry exponential table gives e_i = exp_lut[x_max - x_i];
//   3. an adder tree forms S = sum_i e_i;
//   4. a 256-entry reciprocal table and multipliers give p_i = e_i / S.
// Number formats (design choices): scores are signed Q3.4, so
// exp_lut[k] = round(255 * exp(-k/16)); probabilities are unsigned 8-bit with
// 256 standing for 1.0 (saturated at 255). For stage 4, S is normalised by its
// leading one at bit position L into an 8-bit mantissa m in [128, 255];
// recip_lut[m] = floor(2^15 / m), and p_i = min(255, (e_i * recip_lut[m]) >> L),
// which equals e_i/S * 256 up to table rounding.
// Timing: fixed latency of 4 cycles, one vector per cycle (fully pipelined).
module softmax_unit
  import tcim_pkg::*;
#(
  parameter int unsigned SEQ_P = SEQ
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [7:0]        x [SEQ_P],
  output logic                     out_valid,
  output logic [PROB_BITS-1:0]     p [SEQ_P]
);
  localparam int unsigned SW = 8 + $clog2(SEQ_P) + 1;

  logic [7:0] exp_lut   [256];
  logic [8:0] recip_lut [256];
  initial begin
    $readmemh("rtl/exp_lut.mem", exp_lut);
    $readmemh("rtl/recip_lut.mem", recip_lut);
  end

  logic [3:0]        v;
  logic signed [7:0] x1 [SEQ_P];
  logic signed [7:0] mx1;
  logic [7:0]        e2 [SEQ_P], e3 [SEQ_P];
  logic [SW-1:0]     sum3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; mx1 <= '0; sum3 <= '0;
      for (int i = 0; i < int'(SEQ_P); i++) begin
        x1[i] <= '0; e2[i] <= '0; e3[i] <= '0; p[i] <= '0;
      end
    end else begin
      v <= {v[2:0], in_valid};
      // stage 1: comparator tree
      begin
        logic signed [7:0] m;
        m = x[0];
        for (int i = 1; i < int'(SEQ_P); i++) if (x[i] > m) m = x[i];
        mx1 <= m;
        x1  <= x;
      end
      // stage 2: exponential table
      for (int i = 0; i < int'(SEQ_P); i++) e2[i] <= exp_lut[8'(mx1 - x1[i])];
      // stage 3: adder tree
      begin
        logic [SW-1:0] s;
        s = '0;
        for (int i = 0; i < int'(SEQ_P); i++) s += SW'(e2[i]);
        sum3 <= s;
        e3   <= e2;
      end
      // stage 4: reciprocal table and multipliers
      begin
        int unsigned L;
        logic [7:0]  m;
        logic [8:0]  r;
        L = 0;
        for (int b = 0; b < int'(SW); b++) if (sum3[b]) L = b;
        m = (L >= 7) ? 8'(sum3 >> (L - 7)) : 8'(sum3 << (7 - L));
        r = recip_lut[m];
        for (int i = 0; i < int'(SEQ_P); i++) begin
          logic [31:0] q;
          q = (32'(e3[i]) * 32'(r)) >> L;
          p[i] <= (q > 32'd255) ? 8'd255 : 8'(q);
        end
      end
    end
  end
  assign out_valid = v[3];
endmodule
