// tb_pe_line: self-checking test of a regular PE line.
//
// Runs random 1-D convolutions: random 17-pixel windows, 1..K-wide random
// kernel rows (K <= 10 for stride 1, <= 3 for stride 2), several rows
// accumulated before a clear, some rows loaded with valid=0 (skipped), and
// compares all 8 accumulators with sum_k w[k]*x[p*stride+k] computed here,
// and q with the shift/ReLU/saturation rule. The accumulators are checked
// right after the K-th MAC cycle of every row (1 load + K MAC cycles).
module tb_pe_line;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic load = 1'b0, valid = 1'b0, mac = 1'b0, acc_clr = 1'b0, relu = 1'b0;
  logic [WIN-1:0][7:0] win = '0;
  logic signed [7:0] w = '0;
  logic [1:0] stride = 2'd1;
  logic [4:0] shift = '0;
  logic [NPES-1:0][7:0] q;
  logic signed [ACCW-1:0] acc [NPES];
  int checks = 0, failures = 0;

  pe_line dut (.clk, .rst_n, .load, .valid, .win, .mac, .w, .stride, .acc_clr,
               .shift, .relu, .q, .acc);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint ref_acc [NPES];

  function automatic int ref_q(longint a, int sh, bit rl);
    longint s;
    s = a >>> sh;
    if (rl && s < 0) s = 0;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return int'(s);
  endfunction

  task automatic run_row(int st, int k, bit v);
    int wk [16];
    @(negedge clk);
    for (int i = 0; i < WIN; i++) win[i] = 8'($urandom());
    stride = 2'(st);
    load = 1'b1; valid = v;
    @(negedge clk);
    load = 1'b0;
    for (int t = 0; t < k; t++) begin
      wk[t] = int'($signed(8'($urandom())));
      w = 8'(wk[t]);
      mac = 1'b1;
      if (v)
        for (int p = 0; p < NPES; p++)
          ref_acc[p] += longint'(wk[t]) * longint'($signed(win[p * st + t]));
      @(negedge clk);
    end
    mac = 1'b0;
  endtask

  task automatic check_out(string what);
    for (int p = 0; p < NPES; p++) begin
      checks++;
      if (longint'(acc[p]) != ref_acc[p] || int'($signed(q[p])) != ref_q(ref_acc[p], shift, relu)) begin
        failures++;
        $display("FAIL %s PE %0d: acc %0d exp %0d q %0d exp %0d", what, p, acc[p], ref_acc[p],
                 $signed(q[p]), ref_q(ref_acc[p], shift, relu));
      end
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NPES; p++) ref_acc[p] = 0;
    for (int tile = 0; tile < 60; tile++) begin
      int st, nrows;
      st = (tile % 2) + 1;
      nrows = 1 + int'($urandom_range(8));
      for (int r = 0; r < nrows; r++) begin
        int k;
        k = (st == 2) ? 1 + int'($urandom_range(2)) : 1 + int'($urandom_range(9));
        run_row(st, k, !(r == 1 && tile % 4 == 0));
        // the row is complete at the edge that ends its K-th MAC cycle
        check_out("row");
      end
      shift = 5'($urandom_range(12));
      relu = tile[2];
      #1;
      check_out("tile");
      @(negedge clk);
      acc_clr = 1'b1;
      @(negedge clk);
      acc_clr = 1'b0;
      for (int p = 0; p < NPES; p++) ref_acc[p] = 0;
      check_out("clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
