// tb_layer_workloads: whole-chip runs of three network-layer patterns, checked
// against direct 2-D convolution.
//
// 1. Row-pruned 3x3 CONV, 4 input channels -> 64 output channels (one output
//    channel per lane), at stride 1 and at stride 2, as in the 3x3 layers of
//    the eye-detection and gaze networks. Each lane's 12 kernel rows are
//    restored from its own basis and power-of-two coefficient rows; about
//    half of the rows of each lane are pruned and not stored. The run-length
//    indexes make every lane skip its own pruned rows, so the program runs
//    only as many steps as the densest lane needs. The 12 input rows
//    (channel c, row ky at row 3c+ky) are loaded once.
// 2. Depth-wise 3x3 CONV with the intra-channel mapping: lanes 0..3 produce
//    output rows 0..3 of one channel from the same 6 loaded rows. Their first
//    run-length index (0..3) offsets each lane's starting input row, and all
//    lanes share the same three weight rows.
// 3. Point-wise CONV with channel-group pruning (one index per 3 channels).
// The reference computes restored weights with floor division and sums
// w[o][c][ky][kx] * x[c][ky][p*s+kx] directly, then requantises.
module tb_layer_workloads;
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
    repeat (300000) @(posedge clk);
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

  localparam int CIN = 4, KROWS = 3 * CIN, WGB_COEF = 2 * RANK * KW;

  int         x [KROWS][WIN];             // input rows (row 3c+ky = channel c, row ky)
  int         bm [NLINES][RANK][KW];
  logic [3:0] cm [NLINES][KROWS][RANK];   // full coefficient matrix per lane
  bit         kept [NLINES][KROWS];
  int         nsteps;

  function automatic int restore_w(int l, int kr, int j);
    real a;
    a = 0.0;
    for (int r = 0; r < RANK; r++) begin
      real t;
      if (cm[l][kr][r] == 4'b1000) continue;
      t = $floor(real'(bm[l][r][j]) / real'(1 << cm[l][kr][r][2:0]));
      a += cm[l][kr][r][3] ? -t : t;
    end
    return (a > 127.0) ? 127 : (a < -128.0) ? -128 : int'(a);
  endfunction

  function automatic int rq(longint a, int sh);
    longint s;
    s = a >>> sh;
    return (s > 127) ? 127 : (s < -128) ? -128 : int'(s);
  endfunction

  task automatic write_basis();
    for (int n = 0; n < 2 * RANK * KW; n++) begin
      logic [FMW-1:0] w;
      w = '0;
      for (int l = 0; l < NLINES; l++) begin
        logic [7:0] b;
        b = 8'(bm[l][(n / 2) / KW][(n / 2) % KW]);
        w[4 * l +: 4] = n[0] ? b[7:4] : b[3:0];
      end
      hwrite(HSEL_WGB, n, w);
    end
  endtask

  task automatic write_rows(int nrows);
    for (int i = 0; i < nrows; i++) begin
      logic [FMW-1:0] w;
      w = '0;
      for (int b = 0; b < WIN; b++) w[8 * b +: 8] = 8'(x[i][b]);
      hwrite(HSEL_FM0, i, w);
    end
  endtask

  // Compress: per lane, the stored rows in order, their run-length indexes.
  // Lanes with fewer stored rows are padded with zero rows (index 0).
  task automatic write_sparse_weights(output int steps);
    int cnt [NLINES];
    int lst [NLINES][KROWS];
    int skip [NLINES][KROWS];
    steps = 0;
    for (int l = 0; l < NLINES; l++) begin
      int z;
      cnt[l] = 0; z = 0;
      for (int kr = 0; kr < KROWS; kr++) begin
        if (kept[l][kr] && z <= 3) begin
          lst[l][cnt[l]] = kr; skip[l][cnt[l]] = z; cnt[l]++; z = 0;
        end else begin
          kept[l][kr] = 1'b0;   // a run longer than 3 cannot be encoded: keep it pruned
          z++;
          if (z > 3) begin      // force a stored row so the run stays encodable
            kept[l][kr] = 1'b1;
            for (int r = 0; r < RANK; r++) cm[l][kr][r] = 4'b1000;
            lst[l][cnt[l]] = kr; skip[l][cnt[l]] = 3; cnt[l]++; z = 0;
          end
        end
      end
      if (cnt[l] > steps) steps = cnt[l];
    end
    for (int s = 0; s < steps; s++) begin
      logic [FMW-1:0] w;
      for (int r = 0; r < RANK; r++) begin
        w = '0;
        for (int l = 0; l < NLINES; l++)
          w[4 * l +: 4] = (s < cnt[l]) ? cm[l][lst[l][s]][r] : 4'b1000;
        hwrite(HSEL_WGB, WGB_COEF + RANK * s + r, w);
      end
      w = '0;
      for (int l = 0; l < NLINES; l++) w[2 * l +: 2] = (s < cnt[l]) ? 2'(skip[l][s]) : 2'd0;
      hwrite(HSEL_IDX, s, w);
    end
  endtask

  task automatic run_and_wait();
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(negedge clk);
  endtask

  task automatic sparse_conv(int st, int shift);
    int pc, pruned;
    pruned = 0;
    foreach (x[i, b]) x[i][b] = int'($urandom_range(0, 40));
    for (int l = 0; l < NLINES; l++) begin
      for (int r = 0; r < RANK; r++) for (int j = 0; j < KW; j++) bm[l][r][j] = int'($signed(8'($urandom())));
      for (int kr = 0; kr < KROWS; kr++) begin
        kept[l][kr] = ($urandom_range(1) == 1);
        for (int r = 0; r < RANK; r++) begin
          cm[l][kr][r] = 4'($urandom_range(0, 15));
          if (cm[l][kr][r] == 4'b1000) cm[l][kr][r] = 4'b0001;
        end
      end
    end
    write_rows(KROWS);
    write_basis();
    write_sparse_weights(nsteps);
    for (int l = 0; l < NLINES; l++) for (int kr = 0; kr < KROWS; kr++) if (!kept[l][kr]) pruned++;
    pc = 0;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldifm(1'b0, 7'(KROWS), 1'b1, 16'd0)));
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldbm(16'd0)));
    for (int s = 0; s < nsteps; s++) begin
      hwrite(HSEL_INSTR, pc++, FMW'(mk_ldw(16'(WGB_COEF + RANK * s))));
      hwrite(HSEL_INSTR, pc++, FMW'(mk_comp(s == 0, s == 0, 2'(st), 4'(KW), 16'(s))));
    end
    hwrite(HSEL_INSTR, pc++, FMW'(mk_store(1'b1, 5'(shift), 1'b0, 1'b0, 16'd0)));
    hwrite(HSEL_INSTR, pc++, FMW'(mk_end()));
    run_and_wait();
    $display("sparse 3x3 CONV stride %0d: %0d of %0d kernel rows pruned, %0d steps instead of %0d",
             st, pruned, NLINES * KROWS, nsteps, KROWS);
    chk(nsteps < KROWS, "pruning shortened the program");
    for (int k = 0; k < OFM_WORDS; k++) begin
      logic [FMW-1:0] d;
      hread(HSEL_FM1, k, d);
      for (int j = 0; j < 8; j++)
        for (int p = 0; p < NPES; p++) begin
          int l;
          longint a;
          l = 8 * k + j;
          a = 0;
          for (int kr = 0; kr < KROWS; kr++)
            if (kept[l][kr])
              for (int kx = 0; kx < KW; kx++)
                a += longint'(restore_w(l, kr, kx)) * longint'(x[kr][p * st + kx]);
          chk(int'($signed(d[(8 * j + p) * 8 +: 8])) == rq(a, shift),
              $sformatf("CONV s%0d out ch %0d col %0d: got %0d exp %0d", st, l, p,
                        $signed(d[(8 * j + p) * 8 +: 8]), rq(a, shift)));
        end
    end
  endtask

  task automatic dw_conv();
    int pc, shift;
    shift = 4;
    foreach (x[i, b]) x[i][b] = int'($urandom_range(0, 60));
    // one shared kernel: the same basis and the same 3 coefficient rows in every lane
    for (int r = 0; r < RANK; r++) for (int j = 0; j < KW; j++) bm[0][r][j] = int'($signed(8'($urandom())));
    for (int kr = 0; kr < 3; kr++) for (int r = 0; r < RANK; r++) cm[0][kr][r] = 4'($urandom_range(0, 7));
    for (int l = 1; l < NLINES; l++) begin bm[l] = bm[0]; cm[l] = cm[0]; end
    write_rows(6);
    write_basis();
    for (int s = 0; s < 3; s++) begin
      logic [FMW-1:0] w;
      for (int r = 0; r < RANK; r++) begin
        w = '0;
        for (int l = 0; l < NLINES; l++) w[4 * l +: 4] = cm[0][s][r];
        hwrite(HSEL_WGB, WGB_COEF + RANK * s + r, w);
      end
      // lane l starts at input row (l % 4): the row offset of the intra-channel mapping
      w = '0;
      for (int l = 0; l < NLINES; l++) w[2 * l +: 2] = (s == 0) ? 2'(l % 4) : 2'd0;
      hwrite(HSEL_IDX, s, w);
    end
    pc = 0;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldifm(1'b0, 7'd6, 1'b1, 16'd0)));
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldbm(16'd0)));
    for (int s = 0; s < 3; s++) begin
      hwrite(HSEL_INSTR, pc++, FMW'(mk_ldw(16'(WGB_COEF + RANK * s))));
      hwrite(HSEL_INSTR, pc++, FMW'(mk_comp(s == 0, s == 0, 2'd1, 4'(KW), 16'(s))));
    end
    hwrite(HSEL_INSTR, pc++, FMW'(mk_store(1'b1, 5'(shift), 1'b1, 1'b0, 16'd8)));
    hwrite(HSEL_INSTR, pc++, FMW'(mk_end()));
    run_and_wait();
    for (int k = 0; k < OFM_WORDS; k++) begin
      logic [FMW-1:0] d;
      hread(HSEL_FM1, 8 + k, d);
      for (int j = 0; j < 8; j++)
        for (int p = 0; p < NPES; p++) begin
          int l, y, v;
          longint a;
          l = 8 * k + j;
          y = l % 4;
          a = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < KW; kx++)
              a += longint'(restore_w(0, ky, kx)) * longint'(x[y + ky][p + kx]);
          v = rq(a, shift);
          if (v < 0) v = 0;
          chk(int'($signed(d[(8 * j + p) * 8 +: 8])) == v,
              $sformatf("DW lane %0d (out row %0d) col %0d: got %0d exp %0d", l, y, p,
                        $signed(d[(8 * j + p) * 8 +: 8]), v));
        end
    end
    $display("depth-wise 3x3 CONV: 4 output rows from one 6-row load");
  endtask

  // Point-wise CONV, 6 input channels (rows 0..5) -> 64 output channels. One
  // CM row holds the weights of 3 consecutive input channels, so one index
  // stands for 3 channels; a lane whose first channel group is pruned starts
  // with index 3 and skips straight to channel 3. Each stored CM row is used
  // by three K=1 steps that take weight entries 0, 1 and 2.
  task automatic pw_conv();
    int pc, shift, ngrp_pruned;
    bit gk [NLINES][2];
    int cnt [NLINES];
    int first [NLINES];
    shift = 5;
    ngrp_pruned = 0;
    foreach (x[i, b]) x[i][b] = int'($urandom_range(0, 60));
    for (int l = 0; l < NLINES; l++) begin
      for (int r = 0; r < RANK; r++) for (int j = 0; j < KW; j++) bm[l][r][j] = int'($signed(8'($urandom())));
      cnt[l] = 0;
      for (int g = 0; g < 2; g++) begin
        gk[l][g] = (l % 4 == 0) ? 1'b1 : ($urandom_range(1) == 1);
        if (!gk[l][g]) ngrp_pruned++;
        for (int r = 0; r < RANK; r++) cm[l][g][r] = 4'($urandom_range(0, 7));
        if (gk[l][g]) cnt[l]++;
      end
      first[l] = gk[l][0] ? 0 : (gk[l][1] ? 1 : -1);
    end
    write_rows(6);
    write_basis();
    // stored-row step t of lane l: its t-th kept group, or a zero row
    for (int t = 0; t < 2; t++) begin
      logic [FMW-1:0] w;
      for (int r = 0; r < RANK; r++) begin
        w = '0;
        for (int l = 0; l < NLINES; l++) begin
          int g;
          g = (t == 0) ? first[l] : ((cnt[l] == 2) ? 1 : -1);
          w[4 * l +: 4] = (g >= 0) ? cm[l][g][r] : 4'b1000;
        end
        hwrite(HSEL_WGB, WGB_COEF + RANK * t + r, w);
      end
      for (int c = 0; c < 3; c++) begin
        w = '0;
        for (int l = 0; l < NLINES; l++)
          w[2 * l +: 2] = (t == 0 && c == 0 && first[l] == 1) ? 2'd3 : 2'd0;
        hwrite(HSEL_IDX, 3 * t + c, w);
      end
    end
    pc = 0;
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldifm(1'b0, 7'd6, 1'b1, 16'd0)));
    hwrite(HSEL_INSTR, pc++, FMW'(mk_ldbm(16'd0)));
    for (int t = 0; t < 2; t++) begin
      hwrite(HSEL_INSTR, pc++, FMW'(mk_ldw(16'(WGB_COEF + RANK * t))));
      for (int c = 0; c < 3; c++)
        hwrite(HSEL_INSTR, pc++, FMW'(mk_comp_w(t == 0 && c == 0, t == 0 && c == 0, 2'd1, 4'd1,
                                                3'(c), 16'(3 * t + c))));
    end
    hwrite(HSEL_INSTR, pc++, FMW'(mk_store(1'b1, 5'(shift), 1'b0, 1'b0, 16'd16)));
    hwrite(HSEL_INSTR, pc++, FMW'(mk_end()));
    run_and_wait();
    chk(ngrp_pruned > 0, "channel-group pruning exercised");
    for (int k = 0; k < OFM_WORDS; k++) begin
      logic [FMW-1:0] d;
      hread(HSEL_FM1, 16 + k, d);
      for (int j = 0; j < 8; j++)
        for (int p = 0; p < NPES; p++) begin
          int l;
          longint a;
          l = 8 * k + j;
          a = 0;
          for (int g = 0; g < 2; g++)
            if (gk[l][g])
              for (int c = 0; c < 3; c++)
                a += longint'(restore_w(l, g, c)) * longint'(x[3 * g + c][p]);
          chk(int'($signed(d[(8 * j + p) * 8 +: 8])) == rq(a, shift),
              $sformatf("PW out ch %0d col %0d: got %0d exp %0d", l, p,
                        $signed(d[(8 * j + p) * 8 +: 8]), rq(a, shift)));
        end
    end
    $display("point-wise CONV: %0d of %0d channel groups pruned", ngrp_pruned, 2 * NLINES);
  endtask

  initial begin
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    sparse_conv(1, 7);
    sparse_conv(2, 7);
    dw_conv();
    pw_conv();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
