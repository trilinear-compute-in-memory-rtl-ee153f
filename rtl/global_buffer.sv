// global_buffer: the chip's global SRAM buffer (4 MB by default). It holds the
// input sequence X, LayerNorm parameters and results, one token vector per
// word, and is what broadcasts X to the tiles during attention.
//
// Single port, synchronous: with en high, a write stores wdata at addr on the
// clock edge; a read returns mem[addr] on rdata one cycle later (rdata holds
// until the next read). Word width is WORD_BYTES bytes (one D_MODEL-element
// INT8 vector, a design choice); depth is BYTES / WORD_BYTES.
// What follows the paper: a 4 MB SRAM global buffer that stores the input
// sequence. Design choices: word width, single port, read latency.
module global_buffer
  import tcim_pkg::*;
#(
  parameter int unsigned BYTES      = GB_BYTES,
  parameter int unsigned WORD_BYTES = D_MODEL,
  localparam int unsigned DEPTH     = BYTES / WORD_BYTES,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic                      we,
  input  logic [AW-1:0]             addr,
  input  logic [WORD_BYTES*8-1:0]   wdata,
  output logic [WORD_BYTES*8-1:0]   rdata
);
  logic [WORD_BYTES*8-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
