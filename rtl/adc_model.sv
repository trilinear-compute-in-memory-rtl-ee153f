// adc_model: behavioural model of one column ADC of a subarray. The ADC is a
// mixed-signal part; this model gives only its transfer function.
//
// The input is a column current in the integer units of dgfefet_crossbar. The
// output code is the current divided by the LSB size 2**LSB_SHIFT, rounded
// down, and clipped at the top of the ADC_B-bit range, as the paper's
// hardware-aware mode clips the ADC output to its bit width. `clip` is high
// when the input exceeded full scale. The conversion is combinational: the
// subarray readout registers the code in the cycle the multiplexer selects the
// column, so one conversion takes one clock.
//
// What follows the paper: ADC resolution (8 bits by default) and output
// clipping. Design choices: the uniform (linear) transfer and the LSB size.
module adc_model
  import tcim_pkg::*;
#(
  parameter int unsigned CUR_W     = 24,
  parameter int unsigned ADC_B     = ADC_BITS,
  parameter int unsigned LSB_SHIFT = ADC_SHIFT
) (
  input  logic [CUR_W-1:0] cur,
  output logic [ADC_B-1:0] code,
  output logic             clip
);

  localparam logic [CUR_W-1:0] FULL = CUR_W'((64'd1 << ADC_B) - 1);

  logic [CUR_W-1:0] scaled;

  always_comb begin
    scaled = cur >> LSB_SHIFT;
    clip   = scaled > FULL;
    code   = clip ? ADC_B'(FULL) : ADC_B'(scaled);
  end

endmodule
