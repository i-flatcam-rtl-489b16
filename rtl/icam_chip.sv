// icam_chip: the computational chip of a lensless eye-tracking camera.
//
// A lensless camera's coded measurements are turned into an eye image and a
// gaze estimate by a chain of matrix products and small convolutional
// networks. This chip runs that chain layer by layer on 64 PE lines of 8 MAC
// units each (512 multipliers), with all weights on chip thanks to a
// low-rank, power-of-two, row-pruned weight format:
//
//   host port --> FM GB 0 / FM GB 1 (2 x 50 KB, 512-bit words)
//                    |  512b
//                    v
//                 IFM buffer (SWPR) <-- 64 x 2b run-length indexes <-- index SRAM (20 KB)
//                    |  64 x 17 x 8b
//                    v
//   weight GB --> 64 restore engines --> 64 interleaved weight buffers
//   (180 KB)  4b   (shift-and-add)   8b           | 8b per line
//                                                 v
//                 PE lines 0..62 + switchable PE line 63 (argmax)
//                    |  64 x 8 x 8b
//                    v
//                 OFM buffer --> 512b --> FM GB 0 / FM GB 1
//
//   instruction SRAM (4 KB) --32b--> controller --> every block above
//
// Host port. While busy=0 the host (an external FPGA in the camera system)
// owns every memory: host_sel picks FM GB 0, FM GB 1, the weight GB, the
// index SRAM or the instruction SRAM (hsel_e); host_en/host_we/host_addr/
// host_wdata access it like the memory itself (narrow memories take the low
// bits of host_wdata); a read returns the word on host_rdata one cycle later.
// A start pulse runs the program from instruction 0; busy stays high until
// OP_END, when done rises. Host accesses while busy are ignored.
//
// The block set, sizes and bus widths follow the chip block diagram. The
// host port, the instruction set and the exact sequencing are this design's
// own (see controller).
module icam_chip
  import icam_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  input  logic             host_en,
  input  logic             host_we,
  input  hsel_e            host_sel,
  input  logic [15:0]      host_addr,
  input  logic [FMW-1:0]   host_wdata,
  output logic [FMW-1:0]   host_rdata
);

  localparam int unsigned FM_AW    = $clog2(FM_GB_WORDS);
  localparam int unsigned WGB_AW   = $clog2(WGB_WORDS);
  localparam int unsigned IDX_AW   = $clog2(IDX_WORDS);
  localparam int unsigned INSTR_AW = $clog2(INSTR_WORDS);

  // ---------------- controller ----------------
  logic        c_instr_en;
  logic [9:0]  c_instr_addr;
  logic        c_fm_en, c_fm_we, c_fm_sel;
  logic [15:0] c_fm_addr;
  logic        c_wgb_en, c_idx_en;
  logic [15:0] c_wgb_addr, c_idx_addr;
  re_op_e      re_op;
  logic [4:0]  re_sel;
  logic        wb_swap;
  logic [2:0]  wb_rd_addr;
  logic        ifm_wr_en, ifm_grp_reset, ifm_ptr_clr, ifm_step;
  logic        pe_load, pe_mac, pe_acc_clr;
  logic [1:0]  pe_stride;
  logic [4:0]  q_shift;
  logic        q_relu, q_argmax;
  logic        ofm_capture;
  logic [2:0]  ofm_rd_word;
  logic [31:0] instr_rdata;

  controller u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .instr_en(c_instr_en), .instr_addr(c_instr_addr), .instr_rdata,
    .fm_en(c_fm_en), .fm_we(c_fm_we), .fm_sel(c_fm_sel), .fm_addr(c_fm_addr),
    .wgb_en(c_wgb_en), .wgb_addr(c_wgb_addr), .idx_en(c_idx_en), .idx_addr(c_idx_addr),
    .re_op, .re_sel, .wb_swap, .wb_rd_addr,
    .ifm_wr_en, .ifm_grp_reset, .ifm_ptr_clr, .ifm_step,
    .pe_load, .pe_mac, .pe_acc_clr, .pe_stride, .q_shift, .q_relu, .q_argmax,
    .ofm_capture, .ofm_rd_word
  );

  // ---------------- memories, shared between host and controller ----------------
  logic [FMW-1:0]       ofm_word;
  logic [FMW-1:0]       fm_rdata [2];
  logic [WGB_WIDTH-1:0] wgb_rdata;
  logic [IDX_WIDTH-1:0] idx_rdata;
  logic                 h_go;

  assign h_go = host_en && !busy;

  for (genvar g = 0; g < 2; g++) begin : g_fm
    logic           en, we;
    logic [15:0]    addr;
    logic [FMW-1:0] wdata;
    always_comb begin
      if (busy) begin
        en    = c_fm_en && (c_fm_sel == 1'(g));
        we    = c_fm_we;
        addr  = c_fm_addr;
        wdata = ofm_word;
      end else begin
        en    = h_go && (host_sel == hsel_e'(g));
        we    = host_we;
        addr  = host_addr;
        wdata = host_wdata;
      end
    end
    fm_gb #(.WORDS(FM_GB_WORDS), .WIDTH(FMW)) u_fm_gb (
      .clk, .en, .we, .addr(addr[FM_AW-1:0]), .wdata, .rdata(fm_rdata[g])
    );
  end

  weight_gb #(.WORDS(WGB_WORDS), .WIDTH(WGB_WIDTH)) u_weight_gb (
    .clk,
    .en   (busy ? c_wgb_en : (h_go && host_sel == HSEL_WGB)),
    .we   (busy ? 1'b0 : host_we),
    .addr (busy ? c_wgb_addr[WGB_AW-1:0] : host_addr[WGB_AW-1:0]),
    .wdata(host_wdata[WGB_WIDTH-1:0]),
    .rdata(wgb_rdata)
  );

  index_sram #(.WORDS(IDX_WORDS), .WIDTH(IDX_WIDTH)) u_index_sram (
    .clk,
    .en   (busy ? c_idx_en : (h_go && host_sel == HSEL_IDX)),
    .we   (busy ? 1'b0 : host_we),
    .addr (busy ? c_idx_addr[IDX_AW-1:0] : host_addr[IDX_AW-1:0]),
    .wdata(host_wdata[IDX_WIDTH-1:0]),
    .rdata(idx_rdata)
  );

  instr_sram #(.WORDS(INSTR_WORDS), .WIDTH(32)) u_instr_sram (
    .clk,
    .en   (busy ? c_instr_en : (h_go && host_sel == HSEL_INSTR)),
    .we   (busy ? 1'b0 : host_we),
    .addr (busy ? c_instr_addr[INSTR_AW-1:0] : host_addr[INSTR_AW-1:0]),
    .wdata(host_wdata[31:0]),
    .rdata(instr_rdata)
  );

  // Host read data: the memory read in the previous cycle.
  hsel_e h_sel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     h_sel_q <= HSEL_FM0;
    else if (h_go && !host_we)      h_sel_q <= host_sel;
  end
  always_comb begin
    unique case (h_sel_q)
      HSEL_FM0:   host_rdata = fm_rdata[0];
      HSEL_FM1:   host_rdata = fm_rdata[1];
      HSEL_WGB:   host_rdata = FMW'(wgb_rdata);
      HSEL_IDX:   host_rdata = FMW'(idx_rdata);
      HSEL_INSTR: host_rdata = FMW'(instr_rdata);
      default:    host_rdata = '0;
    endcase
  end

  // ---------------- IFM buffer ----------------
  logic [NLINES-1:0][WIN-1:0][7:0] ifm_win;
  logic [NLINES-1:0]               ifm_valid;
  logic [$clog2(NROWS):0]          ifm_ptr [NLINES];
  logic                            ifm_wr_grp;

  ifm_buffer u_ifm_buffer (
    .clk, .rst_n,
    .wr_en(ifm_wr_en), .wr_data(fm_rdata[c_fm_sel]),
    .grp_reset(ifm_grp_reset), .ptr_clr(ifm_ptr_clr), .step(ifm_step),
    .idx(idx_rdata), .win(ifm_win), .valid(ifm_valid),
    .wr_grp(ifm_wr_grp), .ptr(ifm_ptr)
  );

  // ---------------- restore engines, weight buffers, PE lines ----------------
  logic [NLINES-1:0][NPES-1:0][7:0] pe_q;

  for (genvar l = 0; l < NLINES; l++) begin : g_line
    logic signed [7:0]        w_re, w_pe;
    logic [$clog2(KW)-1:0]    w_col;
    logic                     w_valid;
    logic                     rd_bank;
    logic signed [ACCW-1:0]   acc [NPES];

    restore_engine u_re (
      .clk, .rst_n, .op(re_op), .sel(re_sel), .nib(wgb_rdata[CW*l +: CW]),
      .w_out(w_re), .w_col, .w_valid
    );

    weight_buffer u_wb (
      .clk, .rst_n, .wr_en(w_valid), .wr_addr(3'(w_col)), .wr_data(w_re),
      .swap(wb_swap), .rd_addr(wb_rd_addr), .rd_data(w_pe), .rd_bank
    );

    if (l == NLINES - 1) begin : g_sw
      pe_line_sw u_pe (
        .clk, .rst_n, .load(pe_load), .valid(ifm_valid[l]), .win(ifm_win[l]),
        .mac(pe_mac), .w(w_pe), .stride(pe_stride), .acc_clr(pe_acc_clr),
        .shift(q_shift), .relu(q_relu), .argmax(q_argmax), .q(pe_q[l]), .acc
      );
    end else begin : g_reg
      pe_line u_pe (
        .clk, .rst_n, .load(pe_load), .valid(ifm_valid[l]), .win(ifm_win[l]),
        .mac(pe_mac), .w(w_pe), .stride(pe_stride), .acc_clr(pe_acc_clr),
        .shift(q_shift), .relu(q_relu), .q(pe_q[l]), .acc
      );
    end
  end

  // ---------------- OFM buffer ----------------
  ofm_buffer u_ofm_buffer (
    .clk, .rst_n, .capture(ofm_capture), .d(pe_q),
    .rd_word(ofm_rd_word), .rd_data(ofm_word)
  );

endmodule
