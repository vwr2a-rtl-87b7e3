// lsu: load-store unit of one column.
//
// Moves data between the shared SPM and the column (paper): a whole
// 4096-bit SPM line into or out of one VWR in a single cycle, or one 32-bit
// SPM word into or out of the SRF. It also drives the column's shuffle unit,
// whose result (from VWRs A and B) it writes into VWR C. It runs its own
// program at the shared PC. This design's choices: one line-address register
// AR (set from the SRF or incremented), addresses formed as AR + imm (lines)
// or AR*128 + imm (words), and the opcode set in vwr2a_pkg::lsu_op_e.
//
// SPM access: spm_req is raised combinationally for LDV/STV/LDS/STS. The
// SPM wide port is shared by both columns; the column is stalled (en low)
// until its request is granted, and only the granted cycle has effect. The
// SPM read is combinational in this model, so a load completes in the cycle
// it is issued and the loaded VWR is usable by the next instruction (as in
// the paper's example instruction flow, LOAD at PC 4, use at PC 5).
module lsu
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
  input  lsu_instr_t                  pm_wdata,
  // SRF port request
  output logic                        srf_rd,
  output logic                        srf_wr,
  output srf_idx_t                    srf_idx,
  output word_t                       srf_wdata,
  input  word_t                       srf_rdata,
  // VWRs (wide side) and shuffle unit
  input  vwr_t [N_VWR-1:0]            vwr_q,
  input  vwr_t                        shuf_y,
  output shuf_mode_e                  shuf_mode,
  output logic [N_VWR-1:0]            vwr_we,
  output vwr_t                        vwr_wdata,
  // SPM wide port
  output logic                        spm_req,
  output logic                        spm_we,
  output logic [SPM_WORD_AW-1:0]      spm_addr,    // word address; line = [12:7]
  output logic [VWR_WORDS-1:0]        spm_wmask,   // per-word write enables
  output vwr_t                        spm_wdata,
  input  vwr_t                        spm_rdata
);

  localparam int unsigned WSEL = $clog2(VWR_WORDS);

  lsu_instr_t              ins;
  logic [SPM_LINE_AW-1:0]  ar;
  logic [SPM_LINE_AW-1:0]  line;
  logic [SPM_WORD_AW-1:0]  waddr;
  logic [WSEL-1:0]         wsel;

  prog_mem #(.W($bits(lsu_instr_t)), .DEPTH(PM_WORDS)) u_pm (
    .clk(clk), .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata), .raddr(pc), .rdata(ins)
  );

  always_comb begin
    line  = ar + ins.imm[SPM_LINE_AW-1:0];
    waddr = {ar, {WSEL{1'b0}}} + ins.imm;
    wsel  = waddr[WSEL-1:0];

    srf_idx   = ins.srf_idx;
    srf_rd    = ins.op inside {LSU_STS, LSU_SETA};
    srf_wr    = (ins.op == LSU_LDS);

    shuf_mode = ins.shuf;

    spm_req   = ins.op inside {LSU_LDV, LSU_STV, LSU_LDS, LSU_STS};
    spm_we    = ins.op inside {LSU_STV, LSU_STS};
    spm_addr  = (ins.op inside {LSU_LDS, LSU_STS}) ? waddr : {line, {WSEL{1'b0}}};
    spm_wmask = '0;
    spm_wdata = vwr_q[VS_A];
    if (ins.op == LSU_STV) begin
      spm_wmask = '1;
      unique case (ins.vwr)
        VS_B:    spm_wdata = vwr_q[VS_B];
        VS_C:    spm_wdata = vwr_q[VS_C];
        default: spm_wdata = vwr_q[VS_A];
      endcase
    end else if (ins.op == LSU_STS) begin
      spm_wmask[wsel] = 1'b1;
      for (int i = 0; i < VWR_WORDS; i++) spm_wdata[i] = srf_rdata;
    end

    vwr_we    = '0;
    if (en && ins.op == LSU_LDV && ins.vwr != 2'd3) vwr_we[ins.vwr] = 1'b1;
    if (en && ins.op == LSU_SHUF) begin
      vwr_we[VS_C] = 1'b1;
    end
  end

  // read data kept apart from the address logic above (no false loop
  // through the SPM in lint)
  assign srf_wdata = spm_rdata[wsel];
  assign vwr_wdata = (ins.op == LSU_SHUF) ? shuf_y : spm_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar <= '0;
    end else if (start) begin
      ar <= '0;
    end else if (en) begin
      if (ins.op == LSU_SETA) ar <= srf_rdata[SPM_LINE_AW-1:0] + ins.imm[SPM_LINE_AW-1:0];
      if (ins.op == LSU_ADDA) ar <= ar + ins.imm[SPM_LINE_AW-1:0];
    end
  end

endmodule
