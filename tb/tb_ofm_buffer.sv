// tb_ofm_buffer: self-checking test of the OFM buffer.
//
// Captures random 64 x 8 x 8-bit output blocks and reads back all 8 words,
// checking that word k, byte 8*j+p holds PE p of line 8*k+j. Also checks
// that the stored block does not change while capture is low.
module tb_ofm_buffer;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, capture = 1'b0;
  logic [NLINES-1:0][NPES-1:0][7:0] d = '0;
  logic [2:0] rd_word = '0;
  logic [FMW-1:0] rd_data;
  int checks = 0, failures = 0;

  ofm_buffer dut (.clk, .rst_n, .capture, .d, .rd_word, .rd_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] ref_v [NLINES][NPES];

  task automatic check_words(string what);
    for (int k = 0; k < 8; k++) begin
      rd_word = 3'(k);
      #1;
      for (int j = 0; j < 8; j++)
        for (int p = 0; p < NPES; p++) begin
          checks++;
          if (rd_data[(8 * j + p) * 8 +: 8] !== ref_v[8 * k + j][p]) begin
            failures++;
            $display("FAIL %s word %0d line %0d PE %0d", what, k, 8 * k + j, p);
          end
        end
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      for (int l = 0; l < NLINES; l++)
        for (int p = 0; p < NPES; p++) begin
          ref_v[l][p] = 8'($urandom());
          d[l][p] = ref_v[l][p];
        end
      capture = 1'b1;
      @(negedge clk);
      capture = 1'b0;
      d = '1;   // must not be taken while capture is low
      @(negedge clk);
      check_words("capture");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
