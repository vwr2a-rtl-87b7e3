// vwr2a_tb_pkg: helpers shared by the VWR2A testbenches: functions that
// assemble the per-unit instruction words of a configuration line, and a
// reference for the 16.15 fixed-point multiply.
package vwr2a_tb_pkg;
  import vwr2a_pkg::*;

  function automatic word_t rc_w(alu_op_e op, rc_src_e a = SRC_ZERO, rc_src_e b = SRC_ZERO,
                                 vwr_dst_e vd = VD_NONE, rf_dst_e rd = RD_NONE,
                                 bit srf_we = 0, int srf_idx = 0);
    rc_instr_t x;
    x.op = op; x.src_a = a; x.src_b = b; x.vwr_dst = vd; x.rf_dst = rd;
    x.srf_we = srf_we; x.srf_idx = srf_idx_t'(srf_idx);
    return word_t'(x);
  endfunction

  function automatic word_t lcu_w(lcu_op_e op, int r = 0, int srf_idx = 0, int target = 0,
                                  int imm = 0);
    lcu_instr_t x;
    x.op = op; x.r = 2'(r); x.srf_idx = srf_idx_t'(srf_idx); x.target = pc_t'(target);
    x.imm = 12'(imm);
    return word_t'(x);
  endfunction

  function automatic word_t lsu_w(lsu_op_e op, int vwr = 0, int srf_idx = 0, int shuf = 0,
                                  int imm = 0);
    lsu_instr_t x;
    x.op = op; x.vwr = vwr_sel_e'(vwr); x.srf_idx = srf_idx_t'(srf_idx);
    x.shuf = shuf_mode_e'(shuf); x.imm = 13'(imm);
    return word_t'(x);
  endfunction

  function automatic word_t mx_w(mxcu_op_e op, int srf_idx = 0, int imm = 0);
    mxcu_instr_t x;
    x.op = op; x.srf_idx = srf_idx_t'(srf_idx); x.imm = kidx_t'(imm);
    return word_t'(x);
  endfunction

  // one configuration line; all RCs get the same instruction
  function automatic cfg_line_t line(word_t lcu, word_t lsu, word_t mx, word_t rc);
    cfg_line_t l;
    l[CFG_LCU] = lcu; l[CFG_LSU] = lsu; l[CFG_MXCU] = mx;
    for (int r = 0; r < N_RC; r++) l[CFG_RC0 + r] = rc;
    return l;
  endfunction

  function automatic word_t mulfp_ref(word_t a, word_t b);
    longint p;
    p = longint'(signed'(a)) * longint'(signed'(b));
    return word_t'(p >>> 16);
  endfunction

endpackage
