// controller: fetches 32-bit instructions and sequences one layer step at a
// time across the memories, restore engines, IFM buffer, PE lines and OFM
// buffer.
//
// Program model. A program starts at instruction 0 on start and runs until
// OP_END, which raises done. Each instruction is fetched (1 cycle), decoded
// from the instruction SRAM output (1 cycle) and executed:
//
//   OP_LDIFM  read `rows` words from FM GB `gb` at addr.. into the IFM buffer
//             (one word per cycle; with the group-reset bit, writing restarts
//             at group 0). 2 drain cycles follow.
//   OP_LDBM   read 2*RANK*KW words of the weight GB; word n gives every
//             restore engine basis nibble n.
//   OP_LDW    read RANK coefficient words (one CM row per engine), restore
//             KW weights into the fill bank of every weight buffer, then
//             swap the banks.
//   OP_COMP   read one index word (one run-length index per PE line), load
//             each line's IFM window and step the row pointers, then run K
//             MAC cycles with weight-buffer entries b..b+K-1 (b = bits
//             18:16, normally 0). Optional clears of the accumulators and
//             row pointers come first.
//   OP_COMPW  OP_COMP, and in parallel restore the next CM row (the RANK
//             words after the last row restored) into the idle bank of the
//             weight buffers; the banks swap when both are finished. This
//             is what the interleaved weight buffers are for.
//   OP_STORE  capture all PE outputs (requantised with shift/relu; PE line
//             63 optionally as argmax) in the OFM buffer and write its 8
//             words to FM GB `gb` at addr...
//
// Cycle counts: LDIFM 2+rows+2, LDBM 2+18+1, LDW 2+RANK+KW+3, COMP 2+2+K,
// COMPW 2+max(2+K, RANK+KW+2)+1, STORE 2+1+8. Memory reads have one cycle of latency; the controller
// issues the read in one cycle and applies the data in the next through its
// "d" stage registers.
//
// The chip has a controller fed 32 bits at a time from a 4 KB instruction
// SRAM; everything else here (instruction set, fields, timing) is this
// design's own.
module controller
  import icam_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // instruction SRAM
  output logic        instr_en,
  output logic [9:0]  instr_addr,
  input  logic [31:0] instr_rdata,
  // FM GB 0/1 (one access per cycle)
  output logic        fm_en,
  output logic        fm_we,
  output logic        fm_sel,
  output logic [15:0] fm_addr,
  // weight GB and index SRAM
  output logic        wgb_en,
  output logic [15:0] wgb_addr,
  output logic        idx_en,
  output logic [15:0] idx_addr,
  // restore engines (all 64 in lockstep)
  output re_op_e      re_op,
  output logic [4:0]  re_sel,
  // weight buffers
  output logic        wb_swap,
  output logic [2:0]  wb_rd_addr,
  // IFM buffer
  output logic        ifm_wr_en,
  output logic        ifm_grp_reset,
  output logic        ifm_ptr_clr,
  output logic        ifm_step,
  // PE lines
  output logic        pe_load,
  output logic        pe_mac,
  output logic        pe_acc_clr,
  output logic [1:0]  pe_stride,
  output logic [4:0]  q_shift,
  output logic        q_relu,
  output logic        q_argmax,
  // OFM buffer
  output logic        ofm_capture,
  output logic [2:0]  ofm_rd_word
);

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_LDIFM, S_LDBM, S_LDW_COEF, S_LDW_RESTORE,
    S_LDW_SWAP, S_COMP_IDX, S_COMP_LOAD, S_COMP_MAC, S_STORE_CAP, S_STORE_WR,
    S_DRAIN, S_COMP_WAIT
  } state_e;

  localparam int unsigned NBASIS = 2 * RANK * KW;

  state_e      state;
  logic [9:0]  pc;
  logic [31:0] ir;
  logic [6:0]  cnt;
  // weight prefetch of OP_COMPW: next CM row address and its own counter
  logic [15:0] wptr;
  logic        pf_on;
  logic [3:0]  pcnt;
  localparam int unsigned PF_LEN = RANK + KW + 2;   // reads, restores, write-back
  // "d" stage: actions that use data read in the previous cycle
  logic        d_ifm_wr;
  re_op_e      d_re_op;
  logic [4:0]  d_re_sel;

  opcode_e op_in;
  assign op_in = opcode_e'(instr_rdata[31:28]);

  wire        ir_f27   = ir[27];
  wire        ir_f26   = ir[26];
  wire [6:0]  ir_rows  = ir[26:20];
  wire [3:0]  ir_k     = ir[23:20];
  wire [15:0] ir_addr  = ir[15:0];

  // ---------------- outputs ----------------
  always_comb begin
    instr_en      = (state == S_FETCH);
    instr_addr    = pc;
    fm_en         = 1'b0;
    fm_we         = 1'b0;
    fm_sel        = ir_f27;
    fm_addr       = ir_addr + 16'(cnt);
    wgb_en        = (state == S_LDBM) || (state == S_LDW_COEF) ||
                    (pf_on && 32'(pcnt) < RANK);
    wgb_addr      = pf_on ? wptr + 16'(pcnt) : ir_addr + 16'(cnt);
    idx_en        = (state == S_COMP_IDX);
    idx_addr      = ir_addr;
    re_op         = d_re_op;
    re_sel        = d_re_sel;
    wb_swap       = ((state == S_LDW_SWAP) && (cnt == 7'd2)) ||
                    ((state == S_COMP_WAIT) && 32'(pcnt) >= PF_LEN);
    wb_rd_addr    = ir[18:16] + cnt[2:0];
    ifm_wr_en     = d_ifm_wr;
    ifm_grp_reset = (state == S_DECODE) && (op_in == OP_LDIFM) && instr_rdata[19];
    ifm_ptr_clr   = (state == S_COMP_IDX) && ir_f26;
    ifm_step      = (state == S_COMP_LOAD);
    pe_load       = (state == S_COMP_LOAD);
    pe_mac        = (state == S_COMP_MAC);
    pe_acc_clr    = (state == S_COMP_IDX) && ir_f27;
    pe_stride     = ir[25:24];
    q_shift       = ir[26:22];
    q_relu        = ir[21];
    q_argmax      = ir[20];
    ofm_capture   = (state == S_STORE_CAP);
    ofm_rd_word   = cnt[2:0];
    if (state == S_LDIFM)    fm_en = 1'b1;
    if (state == S_STORE_WR) begin
      fm_en = 1'b1;
      fm_we = 1'b1;
    end
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pc       <= '0;
      ir       <= '0;
      cnt      <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      d_ifm_wr <= 1'b0;
      d_re_op  <= RE_IDLE;
      d_re_sel <= '0;
      wptr     <= '0;
      pf_on    <= 1'b0;
      pcnt     <= '0;
    end else begin
      d_ifm_wr <= 1'b0;
      d_re_op  <= RE_IDLE;
      d_re_sel <= cnt[4:0];
      // weight prefetch running beside an OP_COMPW
      if (pf_on) begin
        if (32'(pcnt) < RANK) begin
          d_re_op  <= RE_LD_COEF;
          d_re_sel <= 5'(pcnt);
        end else if (32'(pcnt) < RANK + KW) begin
          d_re_op  <= RE_RESTORE;
          d_re_sel <= 5'(32'(pcnt) - RANK);
        end
        if (32'(pcnt) < PF_LEN) pcnt <= pcnt + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          busy  <= 1'b1;
          done  <= 1'b0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          ir  <= instr_rdata;
          pc  <= pc + 1'b1;
          cnt <= '0;
          unique case (op_in)
            OP_LDIFM: state <= S_LDIFM;
            OP_LDBM:  state <= S_LDBM;
            OP_LDW:   state <= S_LDW_COEF;
            OP_COMP:  state <= S_COMP_IDX;
            OP_COMPW: begin
              state <= S_COMP_IDX;
              pf_on <= 1'b1;
              pcnt  <= '0;
            end
            OP_STORE: state <= S_STORE_CAP;
            OP_END: begin
              busy  <= 1'b0;
              done  <= 1'b1;
              state <= S_IDLE;
            end
            default: state <= S_FETCH;   // unused opcodes act as no-ops
          endcase
        end
        S_LDIFM: begin
          d_ifm_wr <= 1'b1;
          cnt      <= cnt + 1'b1;
          if (cnt + 1'b1 >= ir_rows) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end
        end
        S_LDBM: begin
          d_re_op <= RE_LD_BASIS;
          cnt     <= cnt + 1'b1;
          if (32'(cnt) == NBASIS - 1) begin
            cnt   <= 7'd1;
            state <= S_DRAIN;
          end
        end
        S_LDW_COEF: begin
          d_re_op <= RE_LD_COEF;
          cnt     <= cnt + 1'b1;
          wptr    <= ir_addr + 16'(RANK);
          if (32'(cnt) == RANK - 1) begin
            cnt   <= '0;
            state <= S_LDW_RESTORE;
          end
        end
        S_LDW_RESTORE: begin
          d_re_op <= RE_RESTORE;
          cnt     <= cnt + 1'b1;
          if (32'(cnt) == KW - 1) begin
            cnt   <= '0;
            state <= S_LDW_SWAP;
          end
        end
        S_LDW_SWAP: begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'd2) state <= S_FETCH;
        end
        S_COMP_IDX:  state <= S_COMP_LOAD;
        S_COMP_LOAD: begin
          cnt   <= '0;
          if (ir_k == 4'd0) state <= pf_on ? S_COMP_WAIT : S_FETCH;
          else              state <= S_COMP_MAC;
        end
        S_COMP_MAC: begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= 7'(ir_k)) state <= pf_on ? S_COMP_WAIT : S_FETCH;
        end
        S_COMP_WAIT: begin
          // swap once the MACs are done and the restored row is written
          if (32'(pcnt) >= PF_LEN) begin
            pf_on <= 1'b0;
            wptr  <= wptr + 16'(RANK);
            state <= S_FETCH;
          end
        end
        S_STORE_CAP: begin
          cnt   <= '0;
          state <= S_STORE_WR;
        end
        S_STORE_WR: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == OFM_WORDS - 1) state <= S_FETCH;
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt >= 7'd1) state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_gb_access: assert property (@(posedge clk) disable iff (!rst_n)
      !(fm_en && d_ifm_wr && fm_we))
    else $error("controller: FM GB write while an IFM load is in flight");

endmodule
