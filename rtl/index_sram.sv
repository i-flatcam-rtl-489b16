// index_sram: the 20 KB run-length index SRAM.
//
// A single-port synchronous memory written as an array, so that synthesis
// maps it onto an SRAM macro. One access per cycle: with en=1 and we=1 the
// word at addr is written; with en=1 and we=0 it is read and appears on
// rdata on the next clock edge (one-cycle read latency). rdata holds its
// value while en=0. Contents are not reset; the array starts undefined as an
// SRAM does, and the host loads it before use.
// Each 128-bit word carries one 2-bit run-length index for each of the 64
// PE lines (index l in bits 2l+1:2l), matching the 64 x 2b path into the IFM
// buffer. 20 KB gives 1280 words.
module index_sram #(
  parameter int unsigned WORDS = 1280,
  parameter int unsigned WIDTH = 128,
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
    else $error("index_sram: address %0d out of range", addr);

endmodule
