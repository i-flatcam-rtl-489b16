// weight_gb: the 180 KB weight global buffer.
//
// A single-port synchronous memory written as an array, so that synthesis
// maps it onto an SRAM macro. One access per cycle: with en=1 and we=1 the
// word at addr is written; with en=1 and we=0 it is read and appears on
// rdata on the next clock edge (one-cycle read latency). rdata holds its
// value while en=0. Contents are not reset; the array starts undefined as an
// SRAM does, and the host loads it before use.
// It holds the compressed weights: basis-matrix nibbles and the non-zero rows
// of the coefficient matrix. Each 256-bit word carries one 4-bit nibble for
// each of the 64 restore engines (nibble l in bits 4l+3:4l), matching the
// 64 x 4b path of the chip. 180 KB gives 5760 words.
module weight_gb #(
  parameter int unsigned WORDS = 5760,
  parameter int unsigned WIDTH = 256,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

  // An address past the end of the array is a programming error.
  a_addr_in_range: assert property (@(posedge clk) en |-> (32'(addr) < WORDS))
    else $error("weight_gb: address %0d out of range", addr);

endmodule
