// tb_pe_line_sw: self-checking test of the switchable PE line (argmax).
//
// Loads random windows and single-weight rows so that the 8 outputs take
// chosen values (random, all equal, maximum at each position, negative),
// then checks in argmax mode that q[0] is the largest output, q[1] the
// lowest position holding it and the rest zero, and in normal mode that q
// equals the requantised accumulators.
module tb_pe_line_sw;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic load = 1'b0, valid = 1'b1, mac = 1'b0, acc_clr = 1'b0, relu = 1'b0, argmax = 1'b0;
  logic [WIN-1:0][7:0] win = '0;
  logic signed [7:0] w = '0;
  logic [1:0] stride = 2'd1;
  logic [4:0] shift = '0;
  logic [NPES-1:0][7:0] q;
  logic signed [ACCW-1:0] acc [NPES];
  int checks = 0, failures = 0;

  pe_line_sw dut (.clk, .rst_n, .load, .valid, .win, .mac, .w, .stride, .acc_clr,
                  .shift, .relu, .argmax, .q, .acc);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Make PE p output v[p]: weight 1, stride 1, window x[p] = v[p].
  task automatic set_outputs(int v [NPES]);
    @(negedge clk);
    acc_clr = 1'b1;
    @(negedge clk);
    acc_clr = 1'b0;
    for (int i = 0; i < WIN; i++) win[i] = (i < NPES) ? 8'(v[i]) : 8'($urandom());
    load = 1'b1;
    @(negedge clk);
    load = 1'b0; mac = 1'b1; w = 8'sd1;
    @(negedge clk);
    mac = 1'b0;
  endtask

  task automatic check(int v [NPES], string what);
    int mx, mi;
    mx = v[0]; mi = 0;
    for (int p = 1; p < NPES; p++) if (v[p] > mx) begin mx = v[p]; mi = p; end
    argmax = 1'b1;
    #1;
    checks++;
    if (int'($signed(q[0])) != mx || int'(q[1]) != mi || q[NPES-1:2] != '0) begin
      failures++;
      $display("FAIL %s argmax: q0=%0d q1=%0d exp %0d @ %0d", what, $signed(q[0]), q[1], mx, mi);
    end
    argmax = 1'b0;
    #1;
    for (int p = 0; p < NPES; p++) begin
      checks++;
      if (int'($signed(q[p])) != v[p]) begin
        failures++;
        $display("FAIL %s normal PE %0d: %0d exp %0d", what, p, $signed(q[p]), v[p]);
      end
    end
  endtask

  initial begin
    int v [NPES];
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      for (int p = 0; p < NPES; p++) v[p] = int'($signed(8'($urandom())));
      if (t < NPES) begin                 // peak at each position
        for (int p = 0; p < NPES; p++) v[p] = -10 + p;
        v[t] = 100;
      end else if (t < NPES + 3) begin    // ties
        for (int p = 0; p < NPES; p++) v[p] = (t == NPES) ? 5 : -128;
        if (t == NPES + 2) begin v[3] = 7; v[6] = 7; end
      end
      set_outputs(v);
      check(v, "case");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
