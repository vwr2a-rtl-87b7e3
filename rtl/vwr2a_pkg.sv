// vwr2a_pkg: sizes, instruction formats and shared types of the VWR2A
// reconfigurable array.
//
// The array has two columns. Each column holds four reconfigurable cells
// (RCs), three very-wide registers (VWRs A, B and C), a scalar register file
// (SRF), a shuffle unit and three specialised slots: the loop-control unit
// (LCU), the load-store unit (LSU) and the multiplexer-control unit (MXCU).
// All units of a column share one program counter and each has its own
// 64-entry program memory, so one PC value selects a wide, pre-decoded
// "column instruction" made of one word per unit.
//
// Sizes taken from the paper: 32-bit datapath, 4x2 RCs, two-entry RC
// register file, 64-word program memories, 4096-bit VWRs and SPM lines
// (128 words), a quarter VWR (32 words) per RC, 3 VWRs per column, an
// 8-entry SRF and a 32 KiB SPM. The instruction encodings below are this
// design's own: the paper names the operations but gives no bit fields.
package vwr2a_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W      = 32;
  localparam int unsigned N_COL       = 2;
  localparam int unsigned N_RC        = 4;                   // RCs per column
  localparam int unsigned VWR_WORDS   = 128;                 // 4096 bits
  localparam int unsigned VWR_W       = VWR_WORDS * DATA_W;
  localparam int unsigned SLICE_WORDS = VWR_WORDS / N_RC;    // 32 words per RC
  localparam int unsigned K_W         = $clog2(SLICE_WORDS); // MXCU index width
  localparam int unsigned N_VWR       = 3;
  localparam int unsigned SRF_N       = 8;
  localparam int unsigned SRF_IDX_W   = $clog2(SRF_N);
  localparam int unsigned PM_DEPTH    = 64;
  localparam int unsigned PC_W        = $clog2(PM_DEPTH);
  localparam int unsigned SPM_BYTES   = 32 * 1024;
  localparam int unsigned SPM_LINES   = SPM_BYTES / (VWR_W / 8); // 64 lines
  localparam int unsigned SPM_LINE_AW = $clog2(SPM_LINES);
  localparam int unsigned SPM_WORD_AW = $clog2(SPM_BYTES / 4);   // 13 bits
  localparam int unsigned LCU_REGS    = 4;
  localparam int unsigned CFG_WORDS   = 3 + N_RC;            // words per column instruction

  typedef logic [DATA_W-1:0]                word_t;
  typedef logic [VWR_WORDS-1:0][DATA_W-1:0] vwr_t;      // one VWR or SPM line
  typedef logic [CFG_WORDS-1:0][DATA_W-1:0] cfg_line_t; // one column instruction
  typedef logic [PC_W-1:0]                  pc_t;
  typedef logic [K_W-1:0]                   kidx_t;
  typedef logic [SRF_IDX_W-1:0]             srf_idx_t;

  // Word order inside a configuration line (cfg_line_t).
  localparam int unsigned CFG_LCU  = 0;
  localparam int unsigned CFG_LSU  = 1;
  localparam int unsigned CFG_MXCU = 2;
  localparam int unsigned CFG_RC0  = 3;

  // ------------------------------------------------------------------ RC
  typedef enum logic [3:0] {
    ALU_NOP   = 4'd0,
    ALU_ADD   = 4'd1,
    ALU_SUB   = 4'd2,
    ALU_MUL   = 4'd3,   // low 32 bits of the signed product
    ALU_MULFP = 4'd4,   // product bits [47:16]: 16.15 fixed point
    ALU_AND   = 4'd5,
    ALU_OR    = 4'd6,
    ALU_XOR   = 4'd7,
    ALU_SLL   = 4'd8,
    ALU_SRL   = 4'd9,
    ALU_SRA   = 4'd10
  } alu_op_e;

  typedef enum logic [3:0] {
    SRC_ZERO = 4'd0,
    SRC_VWRA = 4'd1,   // word k of this RC's slice of VWR A
    SRC_VWRB = 4'd2,
    SRC_VWRC = 4'd3,
    SRC_SRF  = 4'd4,   // SRF entry srf_idx
    SRC_R0   = 4'd5,   // local register file
    SRC_R1   = 4'd6,
    SRC_SELF = 4'd7,   // own previous result
    SRC_UP   = 4'd8,   // previous result of the RC above (row - 1)
    SRC_DOWN = 4'd9,   // previous result of the RC below (row + 1)
    SRC_SIDE = 4'd10   // previous result of the same-row RC of the other column
  } rc_src_e;

  typedef enum logic [1:0] {
    VD_NONE = 2'd0, VD_A = 2'd1, VD_B = 2'd2, VD_C = 2'd3
  } vwr_dst_e;

  typedef enum logic [1:0] {
    RD_NONE = 2'd0, RD_R0 = 2'd1, RD_R1 = 2'd2
  } rf_dst_e;

  typedef struct packed {
    srf_idx_t srf_idx;  // SRF entry read (SRC_SRF) and/or written
    logic     srf_we;   // write the result to SRF[srf_idx]
    rf_dst_e  rf_dst;
    vwr_dst_e vwr_dst;  // write the result to word k of a VWR slice
    rc_src_e  src_b;
    rc_src_e  src_a;
    alu_op_e  op;
  } rc_instr_t;         // 20 bits

  // ----------------------------------------------------------------- LCU
  typedef enum logic [3:0] {
    LCU_NOP   = 4'd0,
    LCU_SETI  = 4'd1,   // R[r] = imm
    LCU_SETS  = 4'd2,   // R[r] = SRF[idx]
    LCU_ADDI  = 4'd3,   // R[r] = R[r] + imm
    LCU_BLT   = 4'd4,   // if R[r] <  SRF[idx] : PC = target   (signed)
    LCU_BLTI  = 4'd5,   // if R[r] <  imm      : PC = target
    LCU_BEQ   = 4'd6,   // if R[r] == SRF[idx] : PC = target
    LCU_BNE   = 4'd7,   // if R[r] != SRF[idx] : PC = target
    LCU_BEQZS = 4'd8,   // if SRF[idx] == 0    : PC = target
    LCU_BNEZS = 4'd9,   // if SRF[idx] != 0    : PC = target
    LCU_JUMP  = 4'd10,  // PC = target
    LCU_EXIT  = 4'd11   // end of kernel, notify the synchronizer
  } lcu_op_e;

  typedef struct packed {
    logic signed [11:0] imm;
    pc_t                target;
    srf_idx_t           srf_idx;
    logic [1:0]         r;
    lcu_op_e            op;
  } lcu_instr_t;        // 27 bits

  // ----------------------------------------------------------------- LSU
  typedef enum logic [3:0] {
    LSU_NOP  = 4'd0,
    LSU_LDV  = 4'd1,    // VWR[vwr] = SPM line (AR + imm)
    LSU_STV  = 4'd2,    // SPM line (AR + imm) = VWR[vwr]
    LSU_LDS  = 4'd3,    // SRF[idx] = SPM word (AR*128 + imm)
    LSU_STS  = 4'd4,    // SPM word (AR*128 + imm) = SRF[idx]
    LSU_SHUF = 4'd5,    // VWR C = shuffle(VWR A, VWR B, mode)
    LSU_SETA = 4'd6,    // AR = SRF[idx] + imm
    LSU_ADDA = 4'd7     // AR = AR + imm
  } lsu_op_e;

  typedef enum logic [2:0] {
    SH_ILV_LO  = 3'd0,  // words interleaving, lower half
    SH_ILV_HI  = 3'd1,  // words interleaving, upper half
    SH_PRUNE_E = 3'd2,  // even-index pruning (odd words kept)
    SH_PRUNE_O = 3'd3,  // odd-index pruning (even words kept)
    SH_BREV_LO = 3'd4,  // bit reversal, lower half
    SH_BREV_HI = 3'd5,  // bit reversal, upper half
    SH_CSH_LO  = 3'd6,  // circular shift by 32 words, lower half
    SH_CSH_HI  = 3'd7   // circular shift by 32 words, upper half
  } shuf_mode_e;

  typedef enum logic [1:0] {
    VS_A = 2'd0, VS_B = 2'd1, VS_C = 2'd2
  } vwr_sel_e;

  typedef struct packed {
    logic [SPM_WORD_AW-1:0] imm;
    shuf_mode_e             shuf;
    srf_idx_t               srf_idx;
    vwr_sel_e               vwr;
    lsu_op_e                op;
  } lsu_instr_t;        // 25 bits

  // ---------------------------------------------------------------- MXCU
  typedef enum logic [2:0] {
    MX_NOP  = 3'd0,
    MX_SETI = 3'd1,     // k = imm
    MX_ADDI = 3'd2,     // k = k + imm
    MX_SETS = 3'd3,     // k = SRF[idx]
    MX_ADDM = 3'd4      // k = (k + imm) & SRF[idx]   (masked index)
  } mxcu_op_e;

  typedef struct packed {
    kidx_t    imm;
    srf_idx_t srf_idx;
    mxcu_op_e op;
  } mxcu_instr_t;       // 11 bits

endpackage
