// tb_icam_chip: end-to-end test of the whole chip at its full default size.
//
// The testbench plays the host: it writes an IFM row stream into FM GB 0,
// per-line basis matrices and power-of-two coefficient rows into the weight
// GB, run-length indexes into the index SRAM and a program into the
// instruction SRAM, pulses start, waits for done and reads the results back
// from FM GB 1. An independent model (floor-division weight restore, a row
// pointer per line, direct 1-D convolution sums) predicts every output byte.
//
// Program: two tiles.
//   tile 1: load 16 rows (both SWPR groups), load the bases, then 6 steps of
//           LDW + COMP (stride 2, 3-wide rows) whose random run-length
//           indexes skip pruned rows and drive some lines past the window;
//           store with ReLU, then store again with PE line 63 in argmax mode.
//   tile 2: load 8 more rows (the oldest group is replaced), one LDW and
//           3 steps at stride 1 in which the first two (OP_COMPW) restore the
//           next weight row while computing; store without ReLU.
// It counts the mechanisms exercised (skipped rows, lines past the window,
// group switches, weight-bank swaps, saturated and ReLU-clipped outputs,
// zero coefficients, argmax) and fails if any never happened. It also checks
// the busy time against the controller's documented cycle counts.
module tb_icam_chip;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  logic busy, done;
  logic host_en = 1'b0, host_we = 1'b0;
  hsel_e host_sel = HSEL_FM0;
  logic [15:0] host_addr = '0;
  logic [FMW-1:0] host_wdata = '0;
  logic [FMW-1:0] host_rdata;
  int checks = 0, failures = 0;

  icam_chip dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic hwrite(hsel_e s, int a, logic [FMW-1:0] d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b1; host_sel = s; host_addr = 16'(a); host_wdata = d;
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  task automatic hread(hsel_e s, int a, output logic [FMW-1:0] d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b0; host_sel = s; host_addr = 16'(a);
    @(negedge clk);
    host_en = 1'b0;
    d = host_rdata;
  endtask

  // ---------------- stimulus and model state ----------------
  localparam int NSTEP1 = 6, NSTEP2 = 3, NSTEP = NSTEP1 + NSTEP2;
  localparam int WGB_COEF = 2 * RANK * KW;   // coefficient words start here

  logic [WIN*8-1:0] rows [24];
  int bm [NLINES][RANK][KW];
  logic [3:0] cf [NSTEP][NLINES][RANK];
  logic [1:0] ix [NSTEP][NLINES];
  longint acc [NLINES][NPES];
  int ptr [NLINES];
  logic [7:0] expect_q [3][NLINES][NPES];  // three stores

  int n_skip = 0, n_overrun = 0, n_zero_coef = 0, n_sat = 0, n_relu = 0;
  int n_swap = 0, n_grp_switch = 0;

  function automatic int restore_w(int l, int s, int j);
    real a;
    a = 0.0;
    for (int r = 0; r < RANK; r++) begin
      real t;
      if (cf[s][l][r] == 4'b1000) continue;
      t = $floor(real'(bm[l][r][j]) / real'(1 << cf[s][l][r][2:0]));
      a += cf[s][l][r][3] ? -t : t;
    end
    return (a > 127.0) ? 127 : (a < -128.0) ? -128 : int'(a);
  endfunction

  function automatic int rq(longint a, int sh, bit rl);
    longint s;
    s = a >>> sh;
    if (rl && s < 0) s = 0;
    return (s > 127) ? 127 : (s < -128) ? -128 : int'(s);
  endfunction

  // model one COMP step for all lines
  task automatic model_step(int s, int st, int row_base);
    for (int l = 0; l < NLINES; l++) begin
      int sel;
      sel = ptr[l] + int'(ix[s][l]);
      if (ix[s][l] != 0) n_skip++;
      if (sel < NROWS) begin
        for (int p = 0; p < NPES; p++)
          for (int k = 0; k < KW; k++)
            acc[l][p] += longint'(restore_w(l, s, k)) *
                         longint'($signed(rows[row_base + sel][8 * (p * st + k) +: 8]));
        ptr[l] = sel + 1;
      end else begin
        n_overrun++;
        ptr[l] = NROWS;
      end
    end
  endtask

  task automatic model_store(int n, int sh, bit rl, bit am);
    for (int l = 0; l < NLINES; l++)
      for (int p = 0; p < NPES; p++) begin
        int v;
        v = rq(acc[l][p], sh, rl);
        if (rq(acc[l][p], sh, 1'b0) != int'(acc[l][p] >>> sh)) n_sat++;
        if (rl && (acc[l][p] >>> sh) < 0) n_relu++;
        expect_q[n][l][p] = 8'(v);
      end
    if (am) begin
      int mx, mi;
      mx = int'($signed(expect_q[n][NLINES-1][0])); mi = 0;
      for (int p = 1; p < NPES; p++)
        if (int'($signed(expect_q[n][NLINES-1][p])) > mx) begin
          mx = int'($signed(expect_q[n][NLINES-1][p])); mi = p;
        end
      for (int p = 0; p < NPES; p++) expect_q[n][NLINES-1][p] = '0;
      expect_q[n][NLINES-1][0] = 8'(mx);
      expect_q[n][NLINES-1][1] = 8'(mi);
    end
  endtask

  task automatic check_store(int n, int addr);
    for (int k = 0; k < OFM_WORDS; k++) begin
      logic [FMW-1:0] d;
      hread(HSEL_FM1, addr + k, d);
      for (int j = 0; j < FMW / (NPES * 8); j++)
        for (int p = 0; p < NPES; p++) begin
          int l;
          l = k * (FMW / (NPES * 8)) + j;
          chk(d[(8 * j + p) * 8 +: 8] === expect_q[n][l][p],
              $sformatf("store %0d line %0d PE %0d: got %0d exp %0d", n, l, p,
                        $signed(d[(8 * j + p) * 8 +: 8]), $signed(expect_q[n][l][p])));
        end
    end
  endtask

  // DUT-side mechanism counters
  int dut_swaps = 0, dut_switch = 0, dut_compw = 0;
  logic prev_grp = 1'b0;
  always @(posedge clk) begin
    if (dut.wb_swap) dut_swaps++;
    if (dut.wb_swap && dut.pe_mac === 1'b0 && dut.u_ctrl.pf_on) dut_compw++;
    if (dut.ifm_wr_grp != prev_grp) dut_switch++;
    prev_grp <= dut.ifm_wr_grp;
  end

  initial begin
    logic [FMW-1:0] w;
    int pc, t0, cycles, exp_cycles;
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- data ----
    foreach (rows[i]) begin
      for (int b = 0; b < WIN; b++) rows[i][8 * b +: 8] = 8'($urandom_range(0, 60));
      if (i == 3) for (int b = 0; b < WIN; b++) rows[i][8 * b +: 8] = 8'd127;  // saturating row
      w = '0;
      w[WIN*8-1:0] = rows[i];
      w[FMW-1:WIN*8] = {(FMW - WIN * 8) / 32 {$urandom()}};   // unused bytes
      hwrite(HSEL_FM0, i, w);
    end
    for (int l = 0; l < NLINES; l++)
      for (int r = 0; r < RANK; r++)
        for (int j = 0; j < KW; j++) bm[l][r][j] = int'($signed(8'($urandom())));
    for (int n = 0; n < 2 * RANK * KW; n++) begin
      w = '0;
      for (int l = 0; l < NLINES; l++) begin
        logic [7:0] b;
        b = 8'(bm[l][(n / 2) / KW][(n / 2) % KW]);
        w[4 * l +: 4] = n[0] ? b[7:4] : b[3:0];
      end
      hwrite(HSEL_WGB, n, w);
    end
    for (int s = 0; s < NSTEP; s++) begin
      for (int l = 0; l < NLINES; l++) begin
        for (int r = 0; r < RANK; r++) begin
          cf[s][l][r] = 4'($urandom());
          if (cf[s][l][r] == 4'b1000) n_zero_coef++;
        end
        // large weights on line 5 in step 0 so that outputs saturate
        if (s == 0 && l == 5) begin
          cf[s][l][0] = 4'b0000; cf[s][l][1] = 4'b0000; cf[s][l][2] = 4'b0000;
          for (int r = 0; r < RANK; r++) for (int j = 0; j < KW; j++) bm[l][r][j] = 100;
        end
        ix[s][l] = (l % 4 == 0) ? 2'd0 : 2'($urandom());
      end
      for (int r = 0; r < RANK; r++) begin
        w = '0;
        for (int l = 0; l < NLINES; l++) w[4 * l +: 4] = cf[s][l][r];
        hwrite(HSEL_WGB, WGB_COEF + RANK * s + r, w);
      end
      w = '0;
      for (int l = 0; l < NLINES; l++) w[2 * l +: 2] = ix[s][l];
      hwrite(HSEL_IDX, s, w);
    end
    // line 5's basis was changed after the basis words were written: rewrite them
    for (int n = 0; n < 2 * RANK * KW; n++) begin
      w = '0;
      for (int l = 0; l < NLINES; l++) begin
        logic [7:0] b;
        b = 8'(bm[l][(n / 2) / KW][(n / 2) % KW]);
        w[4 * l +: 4] = n[0] ? b[7:4] : b[3:0];
      end
      hwrite(HSEL_WGB, n, w);
    end

    // ---- program ----
    pc = 0;
    exp_cycles = 0;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldifm(1'b0, 7'd16, 1'b1, 16'd0)));  exp_cycles += 2 + 16 + 2;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldbm(16'd0)));                      exp_cycles += 2 + 18 + 1;
    for (int s = 0; s < NSTEP1; s++) begin
      hwrite(HSEL_INSTR, pc++, FMW'(mk_ldw(16'(WGB_COEF + RANK * s))));   exp_cycles += 2 + RANK + KW + 3;
      hwrite(HSEL_INSTR, pc++, FMW'(mk_comp(s == 0, s == 0, 2'd2, 4'(KW), 16'(s)))); exp_cycles += 4 + KW;
    end
    hwrite(HSEL_INSTR, pc++, FMW'(mk_store(1'b1, 5'd6, 1'b1, 1'b0, 16'd0)));  exp_cycles += 3 + 8;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_store(1'b1, 5'd6, 1'b0, 1'b1, 16'd8)));  exp_cycles += 3 + 8;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldifm(1'b0, 7'd8, 1'b0, 16'd16)));  exp_cycles += 2 + 8 + 2;
    // tile 2 overlaps restoring the next weight row with the MACs (OP_COMPW)
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldw(16'(WGB_COEF + RANK * NSTEP1))));  exp_cycles += 2 + RANK + KW + 3;
    for (int s = NSTEP1; s < NSTEP; s++) begin
      if (s < NSTEP - 1) begin
        hwrite(HSEL_INSTR, pc++, FMW'(mk_compw(s == NSTEP1, s == NSTEP1, 2'd1, 4'(KW), 3'd0, 16'(s))));
        exp_cycles += 2 + ((2 + KW > RANK + KW + 2) ? 2 + KW : RANK + KW + 2) + 1;
      end else begin
        hwrite(HSEL_INSTR, pc++, FMW'(mk_comp(1'b0, 1'b0, 2'd1, 4'(KW), 16'(s))));
        exp_cycles += 4 + KW;
      end
    end
    hwrite(HSEL_INSTR, pc++, FMW'(mk_store(1'b1, 5'd5, 1'b0, 1'b0, 16'd16))); exp_cycles += 3 + 8;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_end()));                             exp_cycles += 2;

    // ---- model ----
    foreach (acc[l, p]) acc[l][p] = 0;
    foreach (ptr[l]) ptr[l] = 0;
    for (int s = 0; s < NSTEP1; s++) model_step(s, 2, 0);
    model_store(0, 6, 1'b1, 1'b0);
    model_store(1, 6, 1'b0, 1'b1);
    foreach (acc[l, p]) acc[l][p] = 0;
    foreach (ptr[l]) ptr[l] = 0;
    for (int s = NSTEP1; s < NSTEP; s++) model_step(s, 1, 8);   // rows 8..23 after the switch
    model_store(2, 5, 1'b0, 1'b0);
    n_swap = NSTEP;
    n_grp_switch = 3;

    // ---- run ----
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = $time;
    wait (done);
    cycles = (int'($time) - t0) / 10 + 1;
    chk(cycles == exp_cycles, $sformatf("run took %0d cycles, expected %0d", cycles, exp_cycles));
    $display("program of %0d instructions ran in %0d cycles", pc, cycles);

    check_store(0, 0);
    check_store(1, 8);
    check_store(2, 16);

    // ---- mechanism coverage ----
    $display("skipped rows %0d, lines past window %0d, zero coefficients %0d, saturated %0d, relu-clipped %0d",
             n_skip, n_overrun, n_zero_coef, n_sat, n_relu);
    $display("weight-bank swaps %0d, SWPR group switches %0d, argmax stores 1", dut_swaps, dut_switch);
    chk(n_skip > 0, "row skipping exercised");
    chk(n_overrun > 0, "window overrun exercised");
    chk(n_zero_coef > 0, "zero coefficient exercised");
    chk(n_sat > 0, "saturation exercised");
    chk(n_relu > 0, "ReLU exercised");
    chk(dut_swaps == n_swap, "one weight-bank swap per LDW or COMPW");
    chk(dut_compw == 2, "overlapped weight restore exercised");
    chk(dut_switch == n_grp_switch, "SWPR group switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
