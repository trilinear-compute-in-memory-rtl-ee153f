// tcim_pkg: constants and types shared by the trilinear compute-in-memory
// accelerator.
//
// The accelerator computes Transformer self-attention inside double-gate
// FeFET (DG-FeFET) crossbars. Each cell's conductance G0 holds a weight, the
// row (drain) voltage carries one operand and the back-gate voltage a third,
// so one read gives the three-operand product x * w * bg. The numbers below
// follow the paper's default configuration: 64x64 subarrays, 8-bit inputs,
// 8-bit weights in 2-bit cells, 8-bit ADCs shared 8:1 over columns, a 2x2
// grid at the chip, tile and PE levels, a 4 MB global buffer and 64-token
// sequences. Everything marked "design choice" is not fixed by the paper:
// the differential (positive/negative) cell pair per weight slice, the
// back-gate DAC code width, the fixed-point formats of the special function
// unit and the fixed stage-to-tile mapping.
package tcim_pkg;

  // ---- subarray (paper defaults) ----
  localparam int unsigned ROWS      = 64;  // subarray rows (inner-product length)
  localparam int unsigned COLS      = 64;  // subarray columns
  localparam int unsigned CELL_BITS = 2;   // bits per DG-FeFET cell
  localparam int unsigned W_BITS    = 8;   // weight precision
  localparam int unsigned IN_BITS   = 8;   // row input precision (bit-serial)
  localparam int unsigned ADC_BITS  = 8;   // ADC resolution
  localparam int unsigned MUX       = 8;   // columns sharing one ADC

  // ---- design choices around the subarray ----
  // Back-gate DAC code: signed, wide enough for a signed INT8 activation and
  // an unsigned 8-bit softmax probability.
  localparam int unsigned BG_BITS   = 9;
  // Code value that stands for the "1" in G0*(1 + eta*V_BG); it must exceed
  // the largest negative code so that the cell current stays positive.
  localparam int unsigned BG_ONE    = 256;
  // Column current is expressed in units of (one level-1 cell, one active
  // row, V_BG = 0) / BG_ONE; the ADC LSB is ADC_SHIFT of those units, so one
  // ADC LSB equals a level-1 cell at zero back-gate bias.
  localparam int unsigned ADC_SHIFT = 8;

  // Derived subarray geometry: each weight is split into SLICES cells per
  // polarity and stored as a positive and a negative magnitude.
  localparam int unsigned SLICES    = W_BITS / CELL_BITS;   // 4
  localparam int unsigned NW        = COLS / (2 * SLICES);  // weight columns per subarray: 8
  localparam int unsigned N_ADC     = COLS / MUX;           // ADCs per subarray: 8

  // ---- hierarchy (Fig. 3: 2x2 at every level) ----
  localparam int unsigned N_TILE    = 4;   // tiles per chip
  localparam int unsigned N_PE      = 4;   // PEs per tile
  localparam int unsigned N_ARR     = 4;   // subarrays per PE

  // ---- attention head mapped on the chip ----
  localparam int unsigned SEQ       = 64;  // tokens per sequence
  localparam int unsigned D_MODEL   = ROWS;       // embedding width held by one row group
  localparam int unsigned D_K       = 64;         // head dimension

  // ---- global buffer ----
  localparam int unsigned GB_BYTES  = 4 * 1024 * 1024;  // 4 MB SRAM

  // ---- special function unit fixed-point formats (design choice) ----
  localparam int unsigned SCORE_FRAC = 4;  // softmax input: signed Q3.4
  localparam int unsigned PROB_BITS  = 8;  // softmax output: unsigned, 256 = 1.0

  // Operation codes of the chip's command port.
  typedef enum logic [1:0] {
    OP_ATTN      = 2'd0,   // one attention head over the whole sequence
    OP_LAYERNORM = 2'd1,   // LayerNorm of one global-buffer word
    OP_GELU      = 2'd2    // GELU of one global-buffer word
  } op_e;

  // Back-gate drive mode of a subarray read.
  typedef enum logic {
    BG_PER_COLUMN = 1'b0,  // configuration (a): one code per weight column
    BG_BROADCAST  = 1'b1   // configuration (b): one code on every column
  } bg_mode_e;

  // Saturate a signed value to a signed width-W result.
  function automatic logic signed [31:0] sat_s(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return 32'(hi);
    if (v < lo) return 32'(lo);
    return 32'(v);
  endfunction

endpackage
