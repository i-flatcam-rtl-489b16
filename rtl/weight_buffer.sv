// weight_buffer: the interleaved (double-banked) weight buffer of one PE line.
//
// It sits between a restore engine and its PE line. Two banks of DEPTH 8-bit
// weights alternate: the restore engine fills the bank the PE line is not
// reading, and a one-cycle swap pulse hands the new row over. This lets the
// next weight row be restored while the current one is being used.
//
// Interface: wr_en/wr_addr/wr_data write the fill bank on the clock edge;
// rd_addr reads the active bank combinationally into rd_data; swap exchanges
// the roles of the banks at the clock edge (a write in the same cycle still
// lands in the old fill bank). Reset clears both banks and selects bank 0
// for reading.
//
// The chip names this block "interleaved weight buffers" and gives its 8-bit
// ports; the two-bank organisation and depth are this design's reading of
// that name.
module weight_buffer
  import icam_pkg::*;
#(
  parameter int unsigned DEPTH = WB_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic signed [7:0] wr_data,
  input  logic              swap,
  input  logic [AW-1:0]     rd_addr,
  output logic signed [7:0] rd_data,
  output logic              rd_bank
);

  logic signed [7:0] bank [2][DEPTH];

  assign rd_data = bank[rd_bank][rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_bank <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < DEPTH; i++) bank[b][i] <= '0;
    end else begin
      if (wr_en) bank[~rd_bank][wr_addr] <= wr_data;
      if (swap)  rd_bank <= ~rd_bank;
    end
  end

endmodule
