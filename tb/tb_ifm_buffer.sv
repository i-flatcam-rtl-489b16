// tb_ifm_buffer: self-checking test of the SWPR IFM buffer.
//
// Streams random rows in (one 512-bit word per cycle), then drives random
// run-length indexes for all 64 lines over several steps and checks each
// line's window and valid flag against a model that keeps the row stream
// and every line's pointer (row = pointer + index, pointer = row + 1). It
// covers pointer clear, running past the 16-row window (valid = 0), the
// group switch after 8 rows (a third group of rows replaces the oldest
// group) and the two-cycle write latency through Tmp_Buffer.
module tb_ifm_buffer;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, grp_reset = 1'b0, ptr_clr = 1'b0, step = 1'b0;
  logic [FMW-1:0] wr_data = '0;
  logic [NLINES-1:0][IDXW-1:0] idx = '0;
  logic [NLINES-1:0][WIN-1:0][7:0] win;
  logic [NLINES-1:0] valid;
  logic wr_grp;
  logic [$clog2(NROWS):0] ptr [NLINES];
  int checks = 0, failures = 0;
  int n_invalid = 0, n_switch = 0;

  ifm_buffer dut (.clk, .rst_n, .wr_en, .wr_data, .grp_reset, .ptr_clr, .step, .idx,
                  .win, .valid, .wr_grp, .ptr);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WIN*8-1:0] stream [$];
  int ptr_m [NLINES];

  task automatic write_rows(int n);
    for (int i = 0; i < n; i++) begin
      logic [FMW-1:0] d;
      @(negedge clk);
      for (int b = 0; b < FMW / 32; b++) d[32 * b +: 32] = $urandom();
      wr_en = 1'b1; wr_data = d;
      stream.push_back(d[WIN*8-1:0]);
    end
    @(negedge clk);
    wr_en = 1'b0;
    @(negedge clk);   // Tmp_Buffer stage
  endtask

  task automatic check_step(bit do_step);
    int base;
    base = (stream.size() / GRP_ROWS >= 2) ? (stream.size() / GRP_ROWS - 2) * GRP_ROWS : 0;
    for (int l = 0; l < NLINES; l++) idx[l] = 2'($urandom());
    #1;
    for (int l = 0; l < NLINES; l++) begin
      int s;
      bit v;
      s = ptr_m[l] + int'(idx[l]);
      v = s < NROWS;
      checks++;
      if (valid[l] !== v || (v && win[l] !== stream[base + s])) begin
        failures++;
        $display("FAIL line %0d ptr %0d idx %0d: valid %0b exp %0b", l, ptr_m[l], idx[l], valid[l], v);
      end
      if (!v) n_invalid++;
      if (do_step) ptr_m[l] = v ? s + 1 : NROWS;
    end
    if (do_step) begin
      @(negedge clk);
      step = 1'b1;
      @(negedge clk);
      step = 1'b0;
    end
  endtask

  task automatic clear_ptrs();
    @(negedge clk);
    ptr_clr = 1'b1;
    @(negedge clk);
    ptr_clr = 1'b0;
    for (int l = 0; l < NLINES; l++) ptr_m[l] = 0;
  endtask

  initial begin
    bit g0;
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    grp_reset = 1'b1;
    @(negedge clk);
    grp_reset = 1'b0;
    g0 = wr_grp;
    write_rows(GRP_ROWS);
    checks++;
    if (wr_grp === g0) begin failures++; $display("FAIL no group switch after 8 rows"); end
    else n_switch++;
    write_rows(GRP_ROWS);
    for (int pass = 0; pass < 6; pass++) begin
      clear_ptrs();
      for (int s = 0; s < 8; s++) check_step(1'b1);
      check_step(1'b0);
      if (pass % 2 == 1) begin
        write_rows(GRP_ROWS);   // the oldest group is replaced
        n_switch++;
      end
    end
    // a single row is readable two cycles after it is presented
    @(negedge clk);
    grp_reset = 1'b1;
    @(negedge clk);
    grp_reset = 1'b0;
    stream.delete();
    write_rows(1);
    clear_ptrs();
    idx = '0;
    #1;
    checks++;
    if (win[0] !== stream[0]) begin failures++; $display("FAIL write latency"); end
    checks++;
    if (n_invalid == 0) begin failures++; $display("FAIL window overrun never exercised"); end
    $display("invalid windows %0d, group switches %0d", n_invalid, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
