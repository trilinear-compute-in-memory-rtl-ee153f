// accum_unit: the chip-level accumulation unit. It adds the per-column results
// of N_IN tiles and accumulates the total over successive operations:
//     acc[k] <= acc[k] + sum_i in[i][k]      when add is high
// and clears acc when clear is high (clear wins). In value aggregation
// (configuration (b)) the tiles hold identical weights and process different
// tokens; their outputs for the same column are added here (the paper's
// inter-crossbar addition), and repeating this over the sequence gives the
// full sum over tokens. Results are available the cycle after add.
// What follows the paper: cross-tile accumulation at the chip level. Design
// choice: the temporal accumulation over token groups.
module accum_unit
  import tcim_pkg::*;
#(
  parameter int unsigned LANES = D_K,
  parameter int unsigned N_IN  = 2,
  parameter int unsigned IN_W  = 40,
  parameter int unsigned ACC_W = 48
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      add,
  input  logic signed [IN_W-1:0]    in_v [N_IN][LANES],
  output logic signed [ACC_W-1:0]   acc  [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LANES); k++) acc[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < int'(LANES); k++) acc[k] <= '0;
    end else if (add) begin
      for (int k = 0; k < int'(LANES); k++) begin
        logic signed [ACC_W-1:0] s;
        s = acc[k];
        for (int i = 0; i < int'(N_IN); i++) s += ACC_W'(in_v[i][k]);
        acc[k] <= s;
      end
    end
  end
endmodule
