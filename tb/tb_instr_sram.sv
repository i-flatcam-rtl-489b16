// tb_instr_sram: self-checking test of instr_sram.
//
// Writes random words to random addresses (including the first and last),
// keeps its own copy in an associative array, then reads every written
// address back and checks the data and the one-cycle read latency. It also
// checks that rdata holds while en=0 and that a write does not change rdata.
module tb_instr_sram;
  localparam int unsigned WORDS = 1024;
  localparam int unsigned WIDTH = 32;
  localparam int unsigned AW    = $clog2(WORDS);

  logic             clk = 1'b0;
  logic             en = 1'b0, we = 1'b0;
  logic [AW-1:0]    addr = '0;
  logic [WIDTH-1:0] wdata = '0;
  logic [WIDTH-1:0] rdata;
  int checks = 0, failures = 0;

  instr_sram dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd_word();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH; i += 32) v = (v << 32) | WIDTH'($urandom());
    return v;
  endfunction

  logic [WIDTH-1:0] model [int];

  task automatic wr(int a, logic [WIDTH-1:0] d);
    @(negedge clk);
    en = 1'b1; we = 1'b1; addr = AW'(a); wdata = d;
    model[a] = d;
    @(negedge clk);
    en = 1'b0; we = 1'b0;
  endtask

  task automatic rd_check(int a);
    @(negedge clk);
    en = 1'b1; we = 1'b0; addr = AW'(a);
    @(negedge clk);
    en = 1'b0;
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      $display("FAIL addr %0d: got %h exp %h", a, rdata, model[a]);
    end
  endtask

  initial begin
    logic [WIDTH-1:0] held;
    wr(0, rnd_word());
    wr(WORDS - 1, rnd_word());
    for (int i = 0; i < 300; i++) wr(int'($urandom_range(WORDS - 1)), rnd_word());
    foreach (model[a]) rd_check(a);
    // rdata holds while idle and during a write
    held = rdata;
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== held) begin failures++; $display("FAIL rdata changed while idle"); end
    wr(1, ~held);
    checks++;
    if (rdata !== held) begin failures++; $display("FAIL rdata changed by a write"); end
    rd_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
