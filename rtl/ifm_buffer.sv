// ifm_buffer: the sequential-write, parallel-read (SWPR) IFM buffer.
//
// It sits between the feature-map global buffer and the 64 PE lines and
// supplies up to twice the IFM rows that the global buffer alone could, so
// that PE lines can skip the rows whose weights were pruned away.
//
// Write side (sequential): a 512-bit word read from the FM GB is first held
// in Tmp_Buffer for one cycle, then written as one IFM row (its low W bytes,
// pixel i in bits 8i+7:8i) into the next row of the current write group.
// There are two groups, G0 and G1, of GRP rows each. When a group is full the
// switch control moves writing to the other group. The two groups together
// form a window of 2*GRP logical rows: rows 0..GRP-1 are the older group,
// GRP..2*GRP-1 the newer one. Refilling a group makes it the newer one.
// grp_reset returns to "G0 next, G0 older" without clearing data.
//
// Read side (parallel): each PE line l has a row pointer ptr[l]. Its 2-bit
// run-length index idx[l] says how many pruned rows to skip, so line l sees
// logical row sel[l] = ptr[l] + idx[l] on win[l] (combinational from idx).
// On step, ptr[l] <= sel[l] + 1. A line whose sel runs past the window gets
// valid[l]=0 (its work must be re-issued after the next load). ptr_clr sets
// all pointers to 0. This is the 16-row to 64-line multiplexer.
//
// From the chip description: Tmp_Buffer, the two row groups, the switch
// control, the 8-row write path, the 16-row, 64-output multiplexer steered by
// 64 2-bit indexes, the 512b input and 17 x 8b per line. The pointer-plus-
// run-length rule and the group ordering are this design's choices. The
// diagram prints the group width as 8*10*8b; here a row holds W=17 pixels so
// that one row fills a PE line's 17-pixel window.
module ifm_buffer
  import icam_pkg::*;
#(
  parameter int unsigned LINES = NLINES,
  parameter int unsigned W     = WIN,
  parameter int unsigned GRP   = GRP_ROWS,
  parameter int unsigned DW    = FMW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [DW-1:0]                 wr_data,
  input  logic                          grp_reset,
  input  logic                          ptr_clr,
  input  logic                          step,
  input  logic [LINES-1:0][IDXW-1:0]    idx,
  output logic [LINES-1:0][W-1:0][7:0]  win,
  output logic [LINES-1:0]              valid,
  output logic                          wr_grp,
  output logic [$clog2(2*GRP):0]        ptr [LINES]
);

  localparam int unsigned NR = 2 * GRP;
  localparam int unsigned PW = $clog2(NR) + 1;

  logic [W-1:0][7:0] row [2][GRP];    // IFM_Row_G0, IFM_Row_G1
  logic [DW-1:0]     tmp;             // Tmp_Buffer
  logic              tmp_v;
  logic [$clog2(GRP)-1:0] wr_row;
  logic              old_grp;         // group holding logical rows 0..GRP-1
  logic [1:0]        filled;

  // ---------------- sequential write ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tmp     <= '0;
      tmp_v   <= 1'b0;
      wr_row  <= '0;
      wr_grp  <= 1'b0;
      old_grp <= 1'b0;
      filled  <= '0;
      for (int g = 0; g < 2; g++)
        for (int r = 0; r < GRP; r++) row[g][r] <= '0;
    end else begin
      tmp_v <= wr_en;
      if (wr_en) tmp <= wr_data;
      if (grp_reset) begin
        wr_row  <= '0;
        wr_grp  <= 1'b0;
        old_grp <= 1'b0;
        filled  <= '0;
      end else if (tmp_v) begin
        row[wr_grp][wr_row] <= tmp[W*8-1:0];
        if (32'(wr_row) == GRP - 1) begin
          // switch control: the other group receives the next rows
          wr_row <= '0;
          wr_grp <= ~wr_grp;
          filled[wr_grp] <= 1'b1;
          if (filled[wr_grp]) old_grp <= ~wr_grp;
        end else begin
          wr_row <= wr_row + 1'b1;
        end
      end
    end
  end

  // ---------------- parallel read ----------------
  logic [PW-1:0] sel [LINES];

  always_comb begin
    for (int l = 0; l < LINES; l++) begin
      sel[l]   = ptr[l] + PW'(idx[l]);
      valid[l] = (32'(sel[l]) < NR);
      if (valid[l]) begin
        if (32'(sel[l]) < GRP) win[l] = row[old_grp][32'(sel[l]) % GRP];
        else                   win[l] = row[~old_grp][32'(sel[l]) % GRP];
      end else begin
        win[l] = '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LINES; l++) ptr[l] <= '0;
    end else if (ptr_clr) begin
      for (int l = 0; l < LINES; l++) ptr[l] <= '0;
    end else if (step) begin
      for (int l = 0; l < LINES; l++)
        ptr[l] <= valid[l] ? sel[l] + 1'b1 : PW'(NR);
    end
  end

  a_no_write_during_grp_reset: assert property (@(posedge clk) disable iff (!rst_n)
      grp_reset |-> !tmp_v)
    else $error("ifm_buffer: group reset while a row is being written");

endmodule
