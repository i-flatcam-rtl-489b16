// pe_line: one PE line, NPES multiply-accumulate PEs working as a 1-D row-
// stationary convolution engine.
//
// A window of WIN input pixels (one IFM row segment) is loaded into the line's
// IFM FIFO. Each following MAC cycle one weight of the kernel row is broadcast
// to all PEs; PE p multiplies it with FIFO entry p*stride and adds to its
// accumulator, and the FIFO then shifts by one towards PE 0. After K MAC
// cycles PE p holds
//
//     acc[p] += sum_{k<K} w[k] * x[p*stride + k]
//
// i.e. NPES neighbouring outputs of a 1-D convolution with stride 1 or 2.
// Accumulators are not cleared between rows, so a 2-D kernel or several
// input channels are summed by running one row after another; acc_clr
// clears them. A line whose IFM row was pruned away loads with valid=0 and
// then ignores the MAC cycles of that row (structurally skipped work).
//
// Interface (all sampled on the rising edge): load latches win and valid;
// mac performs one step with weight w; acc_clr clears (and wins over mac).
// q is combinational: each accumulator shifted right by shift, optionally
// ReLU-ed and saturated to signed 8 bits.
//
// From the chip description: 8 PEs per line, a shifting IFM FIFO, a
// broadcast weight and 17 x 8b of IFM per line (17 = 7*2+3 serves a
// stride-2, 3-wide kernel). Signed 8-bit operands, the 24-bit accumulator and
// the output requantisation are this design's choices.
module pe_line
  import icam_pkg::*;
#(
  parameter int unsigned PES = NPES,
  parameter int unsigned W   = WIN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic                     valid,
  input  logic [W-1:0][7:0]        win,
  input  logic                     mac,
  input  logic signed [7:0]        w,
  input  logic [1:0]               stride,
  input  logic                     acc_clr,
  input  logic [4:0]               shift,
  input  logic                     relu,
  output logic [PES-1:0][7:0]      q,
  output logic signed [ACCW-1:0]   acc [PES]
);

  logic [W-1:0][7:0] fifo;
  logic              active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo   <= '0;
      active <= 1'b0;
      for (int p = 0; p < PES; p++) acc[p] <= '0;
    end else begin
      if (load) begin
        fifo   <= win;
        active <= valid;
      end else if (mac) begin
        fifo <= {8'h00, fifo[W-1:1]};
      end
      if (acc_clr) begin
        for (int p = 0; p < PES; p++) acc[p] <= '0;
      end else if (mac && active) begin
        for (int p = 0; p < PES; p++)
          acc[p] <= acc[p] + ACCW'($signed(fifo[(p * stride) % W]) * w);
      end
    end
  end

  always_comb
    for (int p = 0; p < PES; p++) q[p] = requant(acc[p], shift, relu);

  a_no_load_and_mac: assert property (@(posedge clk) disable iff (!rst_n) !(load && mac))
    else $error("pe_line: load and mac in the same cycle");

endmodule
