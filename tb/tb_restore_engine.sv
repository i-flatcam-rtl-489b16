// tb_restore_engine: self-checking test of the restore engine.
//
// Loads random 8-bit basis matrices nibble by nibble and random power-of-two
// coefficient rows (including the zero code and saturating cases), asks for
// every column and compares w_out with sum_r s_r * floor(BM[r][j] / 2^e_r),
// computed here with real arithmetic and clipped to [-128, 127]. It also
// checks that w_valid and w_col appear exactly one cycle after the request.
module tb_restore_engine;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  re_op_e op = RE_IDLE;
  logic [4:0] sel = '0;
  logic [3:0] nib = '0;
  logic signed [7:0] w_out;
  logic [1:0] w_col;
  logic w_valid;
  int checks = 0, failures = 0;

  restore_engine dut (.clk, .rst_n, .op, .sel, .nib, .w_out, .w_col, .w_valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bm [RANK][KW];
  logic [3:0] cf [RANK];

  task automatic drive(re_op_e o, int s, logic [3:0] n);
    @(negedge clk);
    op = o; sel = 5'(s); nib = n;
  endtask

  function automatic int expect_w(int j);
    real acc;
    acc = 0.0;
    for (int r = 0; r < RANK; r++) begin
      real t;
      if (cf[r] == 4'b1000) continue;
      t = $floor(real'(bm[r][j]) / real'(1 << cf[r][2:0]));
      acc += cf[r][3] ? -t : t;
    end
    if (acc > 127.0) return 127;
    if (acc < -128.0) return -128;
    return int'(acc);
  endfunction

  initial begin
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 200; trial++) begin
      // new basis every 10 rows
      if (trial % 10 == 0) begin
        for (int r = 0; r < RANK; r++)
          for (int j = 0; j < KW; j++) begin
            logic [7:0] b;
            b = 8'($urandom());
            if (trial == 0) b = (r == 0) ? 8'h7f : 8'h80;   // extremes
            bm[r][j] = int'($signed(b));
            drive(RE_LD_BASIS, 2 * (r * KW + j), b[3:0]);
            drive(RE_LD_BASIS, 2 * (r * KW + j) + 1, b[7:4]);
          end
      end
      for (int r = 0; r < RANK; r++) begin
        cf[r] = 4'($urandom());
        if (trial % 7 == 3 && r == 1) cf[r] = 4'b1000;
        if (trial < 3) cf[r] = (r == 0) ? 4'b0000 : {trial[0], 3'b000};  // saturation
        drive(RE_LD_COEF, r, cf[r]);
      end
      for (int j = 0; j < KW; j++) begin
        drive(RE_RESTORE, j, 4'h0);
        @(negedge clk);
        op = RE_IDLE;
        checks++;
        if (!w_valid || w_col != 2'(j) || int'(w_out) != expect_w(j)) begin
          failures++;
          $display("FAIL trial %0d col %0d: valid=%0b col=%0d w=%0d exp %0d",
                   trial, j, w_valid, w_col, w_out, expect_w(j));
        end
        @(negedge clk);
        checks++;
        if (w_valid) begin failures++; $display("FAIL w_valid held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
