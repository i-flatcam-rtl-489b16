// icam_pkg: sizes, instruction encoding and control types shared by the
// i-FlatCam-style computational chip.
//
// The array sizes (64 PE lines of 8 PEs, 17-byte IFM windows, 512-bit feature
// map global buffer words, 4-bit coefficients, 8-bit weights, 2-bit run-length
// indexes, 32-bit instructions) are the numbers printed in the chip block
// diagram. The low-rank size (3 basis vectors of 3 weights) follows the
// compression illustration. The instruction set and its field layout are this
// design's own: the chip is known to run from a 32-bit instruction memory but
// its encoding is not published.
package icam_pkg;

  // ---------------- array geometry ----------------
  localparam int unsigned NLINES    = 64;   // PE lines
  localparam int unsigned NPES      = 8;    // PEs (multipliers) per PE line
  localparam int unsigned WIN       = 17;   // IFM pixels delivered to one PE line
  localparam int unsigned GRP_ROWS  = 8;    // IFM rows per SWPR group
  localparam int unsigned NROWS     = 2 * GRP_ROWS; // rows readable at once
  localparam int unsigned IDXW      = 2;    // run-length index width
  localparam int unsigned CW        = 4;    // CM coefficient width
  localparam int unsigned RANK      = 3;    // rows of the basis matrix
  localparam int unsigned KW        = 3;    // weights restored per CM row
  localparam int unsigned WB_DEPTH  = 8;    // weight-buffer entries per bank
  localparam int unsigned ACCW      = 24;   // PE accumulator width
  localparam int unsigned FMW       = 512;  // FM GB word width

  // ---------------- memory sizes ----------------
  localparam int unsigned FM_GB_WORDS  = 50 * 1024 * 8 / FMW;             // 800
  localparam int unsigned WGB_WIDTH    = NLINES * CW;                     // 256
  localparam int unsigned WGB_WORDS    = 180 * 1024 * 8 / WGB_WIDTH;      // 5760
  localparam int unsigned IDX_WIDTH    = NLINES * IDXW;                   // 128
  localparam int unsigned IDX_WORDS    = 20 * 1024 * 8 / IDX_WIDTH;       // 1280
  localparam int unsigned INSTR_WORDS  = 4 * 1024 * 8 / 32;               // 1024
  localparam int unsigned OFM_WORDS    = NLINES * NPES * 8 / FMW;         // 8

  // ---------------- host-side memory select ----------------
  typedef enum logic [2:0] {
    HSEL_FM0   = 3'd0,
    HSEL_FM1   = 3'd1,
    HSEL_WGB   = 3'd2,
    HSEL_IDX   = 3'd3,
    HSEL_INSTR = 3'd4
  } hsel_e;

  // ---------------- restore-engine operations ----------------
  typedef enum logic [1:0] {
    RE_IDLE     = 2'd0,
    RE_LD_BASIS = 2'd1,   // sel = nibble number (2 per 8-bit basis element)
    RE_LD_COEF  = 2'd2,   // sel = coefficient number (0..RANK-1)
    RE_RESTORE  = 2'd3    // sel = basis column (0..KW-1)
  } re_op_e;

  // Coefficient code {sign, shift[2:0]} means (sign ? -1 : +1) * 2^-shift;
  // the code 4'b1000 ("minus 2^0" is not used) stands for zero.
  localparam logic [CW-1:0] COEF_ZERO = 4'b1000;

  // ---------------- instruction set ----------------
  typedef enum logic [3:0] {
    OP_END   = 4'd0,  // stop, raise done
    OP_LDIFM = 4'd1,  // [27] gb, [26:20] rows, [19] group reset, [15:0] FM GB addr
    OP_LDBM  = 4'd2,  // [15:0] weight GB addr of 2*RANK*KW basis nibble words
    OP_LDW   = 4'd3,  // [15:0] weight GB addr of RANK coefficient words
    OP_COMP  = 4'd4,  // [27] acc clr, [26] ptr clr, [25:24] stride, [23:20] K,
                      // [18:16] first weight entry, [15:0] index addr
    OP_STORE = 4'd5,  // [27] gb, [26:22] shift, [21] relu, [20] argmax, [15:0] FM GB addr
    OP_COMPW = 4'd6   // as OP_COMP, and meanwhile restore the next CM row into the idle bank
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic        f27;
    logic [6:0]  f26_20;
    logic [3:0]  f19_16;
    logic [15:0] addr;
  } instr_t;

  function automatic logic [31:0] mk_ldifm(logic gb, logic [6:0] rows, logic grp_rst, logic [15:0] addr);
    return {OP_LDIFM, gb, rows, grp_rst, 3'b000, addr};
  endfunction
  function automatic logic [31:0] mk_ldbm(logic [15:0] addr);
    return {OP_LDBM, 12'd0, addr};
  endfunction
  function automatic logic [31:0] mk_ldw(logic [15:0] addr);
    return {OP_LDW, 12'd0, addr};
  endfunction
  function automatic logic [31:0] mk_comp(logic acc_clr, logic ptr_clr, logic [1:0] stride,
                                         logic [3:0] k, logic [15:0] addr);
    return {OP_COMP, acc_clr, ptr_clr, stride, k, 4'd0, addr};
  endfunction
  // COMP starting at weight-buffer entry wbase (e.g. K=1 steps over the three
  // channels of one point-wise CM row)
  function automatic logic [31:0] mk_comp_w(logic acc_clr, logic ptr_clr, logic [1:0] stride,
                                           logic [3:0] k, logic [2:0] wbase, logic [15:0] addr);
    return {OP_COMP, acc_clr, ptr_clr, stride, k, 1'b0, wbase, addr};
  endfunction
  function automatic logic [31:0] mk_compw(logic acc_clr, logic ptr_clr, logic [1:0] stride,
                                          logic [3:0] k, logic [2:0] wbase, logic [15:0] addr);
    return {OP_COMPW, acc_clr, ptr_clr, stride, k, 1'b0, wbase, addr};
  endfunction
  function automatic logic [31:0] mk_store(logic gb, logic [4:0] shift, logic relu, logic argmax,
                                          logic [15:0] addr);
    return {OP_STORE, gb, shift, relu, argmax, 4'd0, addr};
  endfunction
  function automatic logic [31:0] mk_end();
    return 32'd0;
  endfunction

  // Requantisation of an accumulator to an 8-bit output: arithmetic right
  // shift, optional ReLU, saturation to the signed 8-bit range.
  function automatic logic signed [7:0] requant(logic signed [ACCW-1:0] acc, logic [4:0] sh, logic relu);
    logic signed [ACCW-1:0] s;
    s = acc >>> sh;
    if (relu && s < 0) s = '0;
    if (s > 127) return 8'sd127;
    if (s < -128) return -8'sd128;
    return s[7:0];
  endfunction

endpackage
