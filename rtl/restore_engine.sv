// restore_engine: rebuilds 8-bit weights from the compressed form, one per cycle.
//
// The weights of a layer are stacked as a tall, thin matrix W (one row = KW
// neighbouring weights) and factored as W = CM x BM. BM (RANK x KW, 8-bit
// entries) is small and is kept in this engine's local basis registers. CM
// (one RANK-entry row per row of W) is quantised to signed powers of two, so a
// weight is restored without multipliers:
//
//     w[j] = sum_r  s_r * (BM[r][j] >>> e_r)      coefficient code {s_r, e_r}
//
// The coefficient code is 4 bits, {sign, shift[2:0]}; the code 4'b1000 means
// a zero coefficient. The shift is arithmetic (rounds towards minus
// infinity) and the sum saturates to the signed 8-bit range.
//
// Operation (op/sel/nib are sampled on the rising edge):
//   RE_LD_BASIS  sel = 2*(r*KW+j) + h : nibble h (0 = low) of BM[r][j]
//   RE_LD_COEF   sel = r              : coefficient register r
//   RE_RESTORE   sel = j              : one cycle later w_valid=1, w_col=j and
//                                       w_out = restored w[j]
// A CM row therefore costs RANK cycles of 4-bit reads from the weight global
// buffer, and yields KW weights.
//
// From the chip description: 4-bit input, 8-bit output, a coefficient
// register, local basis registers, a column multiplexer, shifters and an
// adder. The sizes RANK=3 and KW=3 are read from the compression
// illustration (three CM columns, BM columns b_x0..b_x2); the nibble-wise
// basis load, the coefficient code and rounding/saturation are this design's
// choices.
module restore_engine
  import icam_pkg::*;
#(
  parameter int unsigned RANK_P = RANK,
  parameter int unsigned KW_P   = KW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  re_op_e                   op,
  input  logic [4:0]               sel,
  input  logic [CW-1:0]            nib,
  output logic signed [7:0]        w_out,
  output logic [$clog2(KW_P)-1:0]  w_col,
  output logic                     w_valid
);

  logic [7:0]    bm   [RANK_P][KW_P];   // local basis registers
  logic [CW-1:0] coef [RANK_P];         // coefficient registers

  // Basis element addressed by a nibble number.
  logic [3:0] e_idx;
  assign e_idx = 4'(sel >> 1);

  // Shift-and-add over the RANK terms for column sel.
  logic signed [9:0] sum;
  always_comb begin
    sum = '0;
    for (int r = 0; r < RANK_P; r++) begin
      logic signed [7:0] b;
      logic signed [9:0] t;
      b = bm[r][32'(sel) % KW_P];
      t = 10'(b >>> coef[r][2:0]);
      if (coef[r] == COEF_ZERO) t = '0;
      else if (coef[r][3])      t = -t;
      sum = sum + t;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < RANK_P; r++) begin
        coef[r] <= COEF_ZERO;
        for (int j = 0; j < KW_P; j++) bm[r][j] <= '0;
      end
      w_out   <= '0;
      w_col   <= '0;
      w_valid <= 1'b0;
    end else begin
      w_valid <= 1'b0;
      unique case (op)
        RE_LD_BASIS: begin
          if (sel[0]) bm[32'(e_idx) / KW_P][32'(e_idx) % KW_P][7:4] <= nib;
          else        bm[32'(e_idx) / KW_P][32'(e_idx) % KW_P][3:0] <= nib;
        end
        RE_LD_COEF:  coef[32'(sel) % RANK_P] <= nib;
        RE_RESTORE: begin
          w_valid <= 1'b1;
          w_col   <= ($clog2(KW_P))'(32'(sel) % KW_P);
          if (sum > 10'sd127)       w_out <= 8'sd127;
          else if (sum < -10'sd128) w_out <= -8'sd128;
          else                      w_out <= sum[7:0];
        end
        default: ;
      endcase
    end
  end

  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n)
      (op == RE_LD_BASIS) |-> (32'(sel) < 2*RANK_P*KW_P))
    else $error("restore_engine: basis nibble %0d out of range", sel);

endmodule
