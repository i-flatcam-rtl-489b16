// tb_controller: self-checking test of the instruction sequencer.
//
// Runs a short program from a model of the instruction SRAM (one-cycle read
// latency) and records, cycle by cycle, every command the controller issues.
// It checks: the FM GB read addresses of OP_LDIFM and the IFM-buffer write
// one cycle after each read; the weight-GB reads of OP_LDBM/OP_LDW and the
// restore-engine op and selector one cycle after each; one bank swap per
// OP_LDW after its last restored weight; the weight prefetch of OP_COMPW
// beside its MACs, with the swap after both; the index read, clears, load/step
// and K MAC cycles (weight addresses from the base field on) of OP_COMP; the capture and 8
// writes of OP_STORE with their quantisation fields; done after OP_END; and
// the documented cycle count of every instruction.
module tb_controller;
  import icam_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  logic busy, done, instr_en;
  logic [9:0] instr_addr;
  logic [31:0] instr_rdata;
  logic fm_en, fm_we, fm_sel, wgb_en, idx_en;
  logic [15:0] fm_addr, wgb_addr, idx_addr;
  re_op_e re_op;
  logic [4:0] re_sel;
  logic wb_swap;
  logic [2:0] wb_rd_addr, ofm_rd_word;
  logic ifm_wr_en, ifm_grp_reset, ifm_ptr_clr, ifm_step;
  logic pe_load, pe_mac, pe_acc_clr, q_relu, q_argmax, ofm_capture;
  logic [1:0] pe_stride;
  logic [4:0] q_shift;
  int checks = 0, failures = 0;

  controller dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] prog [16];
  always_ff @(posedge clk) if (instr_en) instr_rdata <= prog[instr_addr];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ---------------- monitor ----------------
  int cyc = 0;
  int fm_rd [$], fm_wr [$], wgb_rd [$], idx_rd [$], mac_addr [$];
  int n_ifm_wr = 0, n_swap = 0, n_load = 0, n_step = 0, n_cap = 0, n_ptr_clr = 0, n_acc_clr = 0;
  int n_grp_rst = 0, n_basis = 0, n_coef = 0, n_rest = 0;
  bit prev_fm_rd = 0, prev_wgb = 0;
  int prev_wgb_addr = 0;
  int last_restore_cyc = 0, last_mac_cyc = 0;
  bit swap_after_mac = 1'b1;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (fm_en && !fm_we) fm_rd.push_back({fm_sel, fm_addr});
    if (fm_en && fm_we) begin
      fm_wr.push_back({fm_sel, fm_addr});
      chk(int'(ofm_rd_word) == (fm_wr.size() - 1) % 8, "OFM word order");
      chk(q_shift == 5'd3 && q_relu && q_argmax, "STORE fields");
    end
    if (ifm_wr_en) begin n_ifm_wr++; chk(prev_fm_rd, "IFM write one cycle after FM GB read"); end
    if (ifm_grp_reset) n_grp_rst++;
    if (wgb_en) wgb_rd.push_back(int'(wgb_addr));
    if (re_op == RE_LD_BASIS) begin
      chk(prev_wgb && prev_wgb_addr == 100 + int'(re_sel), "basis nibble follows its read");
      n_basis++;
    end
    if (re_op == RE_LD_COEF) begin
      chk(prev_wgb && (prev_wgb_addr == 200 + int'(re_sel) || prev_wgb_addr == 203 + int'(re_sel)),
          "coefficient follows its read");
      n_coef++;
    end
    if (re_op == RE_RESTORE) begin
      chk(int'(re_sel) == n_rest % 3, "restore column order");
      n_rest++;
      last_restore_cyc = cyc;
    end
    if (pe_mac) last_mac_cyc = cyc;
    if (wb_swap) begin
      n_swap++;
      if (n_swap == 2 && cyc <= last_mac_cyc) swap_after_mac = 1'b0;
      chk(cyc >= last_restore_cyc + 2, "swap after the last restored weight is written");
    end
    if (idx_en) idx_rd.push_back(int'(idx_addr));
    if (ifm_ptr_clr) n_ptr_clr++;
    if (pe_acc_clr) n_acc_clr++;
    if (pe_load) n_load++;
    if (ifm_step) n_step++;
    if (pe_mac) begin
      mac_addr.push_back(int'(wb_rd_addr));
      chk(pe_stride == ((idx_rd.size() % 3 == 1) ? 2'd2 : 2'd1), "COMP stride");
    end
    if (ofm_capture) n_cap++;
    prev_fm_rd    = fm_en && !fm_we;
    prev_wgb      = wgb_en;
    prev_wgb_addr = int'(wgb_addr);
  end

  initial begin
    int t0, t_done;
    for (int i = 0; i < 16; i++) prog[i] = mk_end();
    prog[0] = mk_ldifm(1'b1, 7'd3, 1'b1, 16'd10);
    prog[1] = mk_ldbm(16'd100);
    prog[2] = mk_ldw(16'd200);
    prog[3] = mk_comp(1'b1, 1'b1, 2'd2, 4'd3, 16'd5);
    prog[4] = mk_comp_w(1'b0, 1'b0, 2'd1, 4'd2, 3'd1, 16'd6);
    prog[5] = mk_store(1'b0, 5'd3, 1'b1, 1'b1, 16'd40);
    prog[6] = mk_compw(1'b0, 1'b0, 2'd1, 4'd3, 3'd0, 16'd7);
    prog[7] = mk_end();
    #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset before the first clock
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc;
    chk(busy, "busy after start");
    wait (done);
    t_done = cyc;
    @(negedge clk);
    // cycle count: 7 + 21 + 11 + 7 + 6 + 11 + 11 + 2
    chk(t_done - t0 == 76, $sformatf("program took %0d cycles", t_done - t0));
    chk(!busy, "busy low after END");
    chk(fm_rd.size() == 3 && fm_rd[0] == {1'b1, 16'd10} && fm_rd[2] == {1'b1, 16'd12}, "LDIFM reads");
    chk(n_ifm_wr == 3 && n_grp_rst == 1, "LDIFM writes / group reset");
    chk(wgb_rd.size() == 18 + 3 + 3, "weight GB reads");
    for (int i = 0; i < 3; i++) chk(wgb_rd[21 + i] == 203 + i, "COMPW prefetch address");
    for (int i = 0; i < 18; i++) chk(wgb_rd[i] == 100 + i, "LDBM address");
    for (int i = 0; i < 3; i++) chk(wgb_rd[18 + i] == 200 + i, "LDW address");
    chk(n_basis == 18 && n_coef == 6 && n_rest == 6 && n_swap == 2, "RE ops and swaps");
    chk(swap_after_mac, "COMPW swaps only after its last MAC");
    chk(idx_rd.size() == 3 && idx_rd[0] == 5 && idx_rd[1] == 6 && idx_rd[2] == 7, "index reads");
    chk(n_ptr_clr == 1 && n_acc_clr == 1 && n_load == 3 && n_step == 3, "COMP clears and loads");
    chk(mac_addr.size() == 8 && mac_addr[0] == 0 && mac_addr[2] == 2 && mac_addr[3] == 1 && mac_addr[4] == 2
        && mac_addr[5] == 0 && mac_addr[7] == 2, "MAC weight addresses");
    chk(n_cap == 1 && fm_wr.size() == 8, "STORE capture and writes");
    for (int i = 0; i < fm_wr.size(); i++) chk(fm_wr[i] == {1'b0, 16'(40 + i)}, "STORE address");
    // a second start runs the program again
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    chk(n_cap == 2, "restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
