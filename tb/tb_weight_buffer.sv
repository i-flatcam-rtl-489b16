// tb_weight_buffer: self-checking test of the double-banked weight buffer.
//
// Fills the fill bank with a random row while reading the active bank,
// checks that the reads still return the previous row until swap, and after
// swap return the new row. Also checks the reset contents (zero), a write in
// the same cycle as swap (it must land in the old fill bank) and rd_bank.
module tb_weight_buffer;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, swap = 1'b0;
  logic [2:0] wr_addr = '0, rd_addr = '0;
  logic signed [7:0] wr_data = '0, rd_data;
  logic rd_bank;
  int checks = 0, failures = 0;

  weight_buffer dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .swap, .rd_addr, .rd_data, .rd_bank);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] cur [8], nxt [8];

  task automatic check_all(logic signed [7:0] exp_row [8], string what);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      rd_addr = 3'(i);
      #1;
      checks++;
      if (rd_data !== exp_row[i]) begin
        failures++;
        $display("FAIL %s entry %0d: got %0d exp %0d", what, i, rd_data, exp_row[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) cur[i] = '0;
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check_all(cur, "reset");
    for (int it = 0; it < 40; it++) begin
      bit last_with_swap;
      bit exp_bank;
      last_with_swap = (it % 3 == 1);
      for (int i = 0; i < 8; i++) nxt[i] = 8'($urandom());
      for (int i = 0; i < 8; i++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_addr = 3'(i); wr_data = nxt[i];
        swap = last_with_swap && (i == 7);
        // interleaved: the active bank is still readable while being refilled
        rd_addr = 3'(7 - i);
        #1;
        checks++;
        if (rd_data !== cur[7 - i]) begin
          failures++;
          $display("FAIL it %0d: active bank disturbed by fill", it);
        end
      end
      exp_bank = rd_bank;
      @(negedge clk);
      wr_en = 1'b0;
      if (!last_with_swap) begin
        swap = 1'b1;
        @(negedge clk);
      end
      swap = 1'b0;
      checks++;
      if (rd_bank === exp_bank) begin failures++; $display("FAIL rd_bank did not flip"); end
      cur = nxt;
      check_all(cur, "after swap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
