// ofm_buffer: collects the outputs of all PE lines and hands them to the
// feature-map global buffer as 512-bit words.
//
// On capture it stores the LINES x PES 8-bit outputs in one cycle. The
// stored block is then read out word by word: word k (k = 0 .. LINES*PES*8/DW
// - 1) holds the outputs of PE lines k*LPW .. k*LPW+LPW-1, LPW = DW/(PES*8),
// line by line from the low end, PE 0 of each line in its lowest byte. With
// the chip's sizes (64 lines x 8 outputs x 8 bits, 512-bit words) that is 8
// words of 8 lines each. rd_word selects the word; rd_data follows it
// combinationally from the stored block.
//
// From the chip description: the 64x8x8b input and the 512b output. The word
// order is this design's choice.
module ofm_buffer
  import icam_pkg::*;
#(
  parameter int unsigned LINES = NLINES,
  parameter int unsigned PES   = NPES,
  parameter int unsigned DW    = FMW,
  parameter int unsigned NW    = LINES * PES * 8 / DW
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              capture,
  input  logic [LINES-1:0][PES-1:0][7:0]    d,
  input  logic [$clog2(NW)-1:0]             rd_word,
  output logic [DW-1:0]                     rd_data
);

  logic [NW-1:0][DW-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       buf_q <= '0;
    else if (capture) buf_q <= d;
  end

  assign rd_data = buf_q[rd_word];

endmodule
