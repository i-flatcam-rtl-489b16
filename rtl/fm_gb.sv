// fm_gb: one 50 KB feature-map global buffer (FM GB 0 or FM GB 1).
//
// A single-port synchronous memory written as an array, so that synthesis
// maps it onto an SRAM macro. One access per cycle: with en=1 and we=1 the
// word at addr is written; with en=1 and we=0 it is read and appears on
// rdata on the next clock edge (one-cycle read latency). rdata holds its
// value while en=0. Contents are not reset; the array starts undefined as an
// SRAM does, and the host loads it before use.
// Size follows the chip: 50 KB as 800 words of 512 bits, the width of the
// port to the IFM buffer and from the OFM buffer. The chip holds two of them;
// a layer reads its input from one and writes its output to the other.
module fm_gb #(
  parameter int unsigned WORDS = 800,
  parameter int unsigned WIDTH = 512,
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
    else $error("fm_gb: address %0d out of range", addr);

endmodule
