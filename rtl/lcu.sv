// lcu: loop-control unit of one column.
//
// The LCU is the column slot that steers the shared program counter (paper):
// it generates branches and jumps, which allows nested loops of any depth and
// control-intensive code, and it tells the synchronizer when the kernel ends
// (EXIT). It has its own 64-word program memory read at the shared PC.
// This design's choices: four loop registers R0..R3 (the paper's example
// uses counters i and j), the operation set in vwr2a_pkg::lcu_op_e, signed
// compares, and branch conditions on an SRF entry (BEQZS/BNEZS) so that data
// computed by the RCs can steer control flow.
//
// Timing: next_pc is combinational from the current instruction; the column
// loads it into the PC at the rising edge when en is high. Loop registers
// are cleared by start (kernel launch) and by reset.
module lcu
  import vwr2a_pkg::*;
#(
  parameter int unsigned PM_WORDS = PM_DEPTH
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic                        start,
  input  logic [$clog2(PM_WORDS)-1:0] pc,
  input  logic                        pm_we,
  input  logic [$clog2(PM_WORDS)-1:0] pm_waddr,
  input  lcu_instr_t                  pm_wdata,
  // SRF port request
  output logic                        srf_rd,
  output srf_idx_t                    srf_idx,
  input  word_t                       srf_rdata,
  // control
  output logic [$clog2(PM_WORDS)-1:0] next_pc,
  output logic                        branch,   // a taken branch or jump
  output logic                        exit_k    // EXIT executed this cycle
);

  lcu_instr_t ins;
  word_t      r [LCU_REGS];
  word_t      cur, imm_ext;
  logic       take;

  prog_mem #(.W($bits(lcu_instr_t)), .DEPTH(PM_WORDS)) u_pm (
    .clk(clk), .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata), .raddr(pc), .rdata(ins)
  );

  always_comb begin
    cur     = r[ins.r];
    imm_ext = word_t'(ins.imm);   // sign-extended
    srf_idx = ins.srf_idx;
    srf_rd  = ins.op inside {LCU_SETS, LCU_BLT, LCU_BEQ, LCU_BNE, LCU_BEQZS, LCU_BNEZS};
    unique case (ins.op)
      LCU_BLT:   take = $signed(cur) < $signed(srf_rdata);
      LCU_BLTI:  take = $signed(cur) < $signed(imm_ext);
      LCU_BEQ:   take = cur == srf_rdata;
      LCU_BNE:   take = cur != srf_rdata;
      LCU_BEQZS: take = srf_rdata == '0;
      LCU_BNEZS: take = srf_rdata != '0;
      LCU_JUMP:  take = 1'b1;
      default:   take = 1'b0;
    endcase
    branch  = take;
    exit_k  = (ins.op == LCU_EXIT);
    next_pc = take ? ins.target[$clog2(PM_WORDS)-1:0] : pc + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LCU_REGS; i++) r[i] <= '0;
    end else if (start) begin
      for (int i = 0; i < LCU_REGS; i++) r[i] <= '0;
    end else if (en) begin
      unique case (ins.op)
        LCU_SETI: r[ins.r] <= imm_ext;
        LCU_SETS: r[ins.r] <= srf_rdata;
        LCU_ADDI: r[ins.r] <= cur + imm_ext;
        default: ;
      endcase
    end
  end

endmodule
