// pe_line_sw: the switchable PE line (PE line 63).
//
// It is a regular pe_line whose NPES requantised outputs also feed an argmax
// comparator tree (NPES/2, then NPES/4, ... two-input ">" comparators, each
// passing on the larger value and its position; on a tie the lower position
// wins). An output multiplexer then selects either the normal outputs or the
// argmax result. The argmax lets the chip reduce an eye-detection output row
// to its peak without sending the whole row out.
//
// Interface: as pe_line, plus argmax. With argmax=0, q is the line's normal
// output; with argmax=1, q[0] is the largest output value, q[1] its position
// (0..NPES-1) and the other entries are zero. The path is combinational.
//
// From the chip description: the comparator tree, the "Argmax" label and the
// output multiplexer. The layout of the argmax result on the output bus and
// the tie rule are this design's choices.
module pe_line_sw
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
  input  logic                     argmax,
  output logic [PES-1:0][7:0]      q,
  output logic signed [ACCW-1:0]   acc [PES]
);

  localparam int unsigned LV = $clog2(PES);

  logic [PES-1:0][7:0] q_line;

  pe_line #(.PES(PES), .W(W)) u_line (
    .clk, .rst_n, .load, .valid, .win, .mac, .w, .stride, .acc_clr,
    .shift, .relu, .q(q_line), .acc
  );

  // Comparator tree: level 0 holds the PES outputs, level l+1 half as many.
  logic signed [7:0] tv [LV+1][PES];
  logic [7:0]        ti [LV+1][PES];

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < PES; i++) begin
        tv[l][i] = '0;
        ti[l][i] = '0;
      end
    for (int i = 0; i < PES; i++) begin
      tv[0][i] = $signed(q_line[i]);
      ti[0][i] = 8'(i);
    end
    for (int l = 0; l < LV; l++)
      for (int i = 0; i < (PES >> (l + 1)); i++) begin
        if (tv[l][2*i+1] > tv[l][2*i]) begin
          tv[l+1][i] = tv[l][2*i+1];
          ti[l+1][i] = ti[l][2*i+1];
        end else begin
          tv[l+1][i] = tv[l][2*i];
          ti[l+1][i] = ti[l][2*i];
        end
      end
  end

  always_comb begin
    if (argmax) begin
      q    = '0;
      q[0] = tv[LV][0];
      q[1] = ti[LV][0];
    end else begin
      q = q_line;
    end
  end

endmodule
