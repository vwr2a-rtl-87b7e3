// mxcu: multiplexer-control unit of one column.
//
// Holds the word index k that every RC of the column uses to select a word
// in its quarter of the VWRs, for reading and for writing results back
// (paper: one shared index to limit control bits). It runs its own program,
// read at the shared PC. Operations (encoding is this design's): set k,
// add to k (the paper's "k++"), load k from the SRF, and add then mask with
// an SRF value (the paper keeps "masking values for the VWRs index
// computation" in the SRF). k wraps modulo 32.
//
// Timing: k is a register; an update takes effect in the next cycle, so the
// instruction that changes k still sees the old index. Cleared by start.
module mxcu
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
  input  mxcu_instr_t                 pm_wdata,
  output logic                        srf_rd,
  output srf_idx_t                    srf_idx,
  input  word_t                       srf_rdata,
  output kidx_t                       k
);

  mxcu_instr_t ins;
  kidx_t       k_q, k_sum;

  prog_mem #(.W($bits(mxcu_instr_t)), .DEPTH(PM_WORDS)) u_pm (
    .clk(clk), .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata), .raddr(pc), .rdata(ins)
  );

  always_comb begin
    srf_rd  = ins.op inside {MX_SETS, MX_ADDM};
    srf_idx = ins.srf_idx;
    k_sum   = k_q + ins.imm;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q <= '0;
    end else if (start) begin
      k_q <= '0;
    end else if (en) begin
      unique case (ins.op)
        MX_SETI: k_q <= ins.imm;
        MX_ADDI: k_q <= k_sum;
        MX_SETS: k_q <= srf_rdata[K_W-1:0];
        MX_ADDM: k_q <= k_sum & srf_rdata[K_W-1:0];
        default: ;
      endcase
    end
  end

  assign k = k_q;

endmodule
