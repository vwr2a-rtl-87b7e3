// rc: one reconfigurable cell of a VWR2A column.
//
// An RC holds a 64-word program memory, a two-entry 32-bit register file, a
// result register and a 32-bit ALU (rc_alu). Each cycle in which the column
// is enabled (en), the instruction at the shared PC selects two operands,
// computes, and writes the result to any of: the result register (seen by
// the neighbours in the next cycle), a local register, word k of this RC's
// slice of one VWR, and an SRF entry. Paper: two-entry RF, 32-bit ALU,
// single-cycle operations, operand sources VWRs / SRF / local RF /
// previous-cycle results of neighbouring RCs, 64-word program memory, and
// instruction bits that drive the datapath directly without decoding.
// This design's choices: the instruction format (vwr2a_pkg::rc_instr_t),
// a zero source and the RC's own previous result as extra sources, and a
// NOP that leaves every register unchanged.
//
// Timing: operands are read and the result computed in the same cycle; all
// writes happen at the rising edge that ends it (when en is high). The SRF
// request (srf_rd/srf_wr/srf_idx/srf_wdata) is combinational and is granted
// by the column's SRF port arbiter.
module rc
  import vwr2a_pkg::*;
#(
  parameter int unsigned PM_WORDS = PM_DEPTH
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,          // column advances this cycle
  input  logic [$clog2(PM_WORDS)-1:0] pc,
  // program memory load
  input  logic                        pm_we,
  input  logic [$clog2(PM_WORDS)-1:0] pm_waddr,
  input  rc_instr_t                   pm_wdata,
  // operands
  input  word_t [N_VWR-1:0]           vwr_rdata,   // word k of this slice, A/B/C
  input  word_t                       srf_rdata,
  input  word_t                       up_in,
  input  word_t                       down_in,
  input  word_t                       side_in,
  // results
  output word_t                       res,         // registered result
  output logic [N_VWR-1:0]            vwr_we,      // write word k of A/B/C
  output word_t                       vwr_wdata,
  output logic                        srf_rd,
  output logic                        srf_wr,
  output srf_idx_t                    srf_idx,
  output word_t                       srf_wdata
);

  rc_instr_t ins;
  word_t     rf [2];
  word_t     res_q;
  word_t     opa, opb, y;
  logic      active;

  prog_mem #(.W($bits(rc_instr_t)), .DEPTH(PM_WORDS)) u_pm (
    .clk   (clk),
    .we    (pm_we),
    .waddr (pm_waddr),
    .wdata (pm_wdata),
    .raddr (pc),
    .rdata (ins)
  );

  function automatic word_t pick(rc_src_e s, word_t [N_VWR-1:0] v, word_t srf,
                                 word_t r0, word_t r1, word_t self_q,
                                 word_t up, word_t dn, word_t sd);
    unique case (s)
      SRC_VWRA: return v[0];
      SRC_VWRB: return v[1];
      SRC_VWRC: return v[2];
      SRC_SRF:  return srf;
      SRC_R0:   return r0;
      SRC_R1:   return r1;
      SRC_SELF: return self_q;
      SRC_UP:   return up;
      SRC_DOWN: return dn;
      SRC_SIDE: return sd;
      default:  return '0;
    endcase
  endfunction

  always_comb begin
    active = (ins.op != ALU_NOP);
    opa = pick(ins.src_a, vwr_rdata, srf_rdata, rf[0], rf[1], res_q, up_in, down_in, side_in);
    opb = pick(ins.src_b, vwr_rdata, srf_rdata, rf[0], rf[1], res_q, up_in, down_in, side_in);
  end

  rc_alu u_alu (.op(ins.op), .a(opa), .b(opb), .y(y));

  always_comb begin
    vwr_we    = '0;
    if (en && active && ins.vwr_dst != VD_NONE) vwr_we[ins.vwr_dst - 1] = 1'b1;
    vwr_wdata = y;
    srf_rd    = active && (ins.src_a == SRC_SRF || ins.src_b == SRC_SRF);
    srf_wr    = active && ins.srf_we;
    srf_idx   = ins.srf_idx;
    srf_wdata = y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_q <= '0;
      rf[0] <= '0;
      rf[1] <= '0;
    end else if (en && active) begin
      res_q <= y;
      if (ins.rf_dst == RD_R0) rf[0] <= y;
      if (ins.rf_dst == RD_R1) rf[1] <= y;
    end
  end

  assign res = res_q;

endmodule
