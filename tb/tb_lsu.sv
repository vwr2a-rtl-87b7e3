// tb_lsu: the testbench plays the column around the load-store unit: an SPM
// array, three VWRs, an SRF array and a stand-in shuffle result (word-wise
// A xor B). A ten-instruction program loads lines into A and B, shuffles into
// C, sets and bumps the address register, stores C, moves words between the
// SPM and the SRF, and is held once by a refused SPM grant. Final SPM, VWR
// and SRF contents are compared with values derived by hand from the
// program.
module tb_lsu;
  import vwr2a_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   en, start, pm_we, gnt;
  pc_t                    pc, pm_waddr;
  lsu_instr_t             pm_wdata;
  logic                   srf_rd, srf_wr, spm_req, spm_we;
  srf_idx_t               srf_idx;
  word_t                  srf_wdata, srf_rdata;
  vwr_t [N_VWR-1:0]       vwr_q;
  vwr_t                   shuf_y, vwr_wdata, spm_wdata, spm_rdata;
  shuf_mode_e             shuf_mode;
  logic [N_VWR-1:0]       vwr_we;
  logic [SPM_WORD_AW-1:0] spm_addr;
  logic [VWR_WORDS-1:0]   spm_wmask;

  vwr_t  mem [SPM_LINES];
  vwr_t  mem0 [SPM_LINES];
  word_t srf_m [SRF_N];
  int checks = 0, failures = 0;

  lsu dut (.clk(clk), .rst_n(rst_n), .en(en), .start(start), .pc(pc), .pm_we(pm_we),
           .pm_waddr(pm_waddr), .pm_wdata(pm_wdata), .srf_rd(srf_rd), .srf_wr(srf_wr),
           .srf_idx(srf_idx), .srf_wdata(srf_wdata), .srf_rdata(srf_rdata), .vwr_q(vwr_q),
           .shuf_y(shuf_y), .shuf_mode(shuf_mode), .vwr_we(vwr_we), .vwr_wdata(vwr_wdata),
           .spm_req(spm_req), .spm_we(spm_we), .spm_addr(spm_addr), .spm_wmask(spm_wmask),
           .spm_wdata(spm_wdata), .spm_rdata(spm_rdata));

  assign en        = !spm_req || gnt;
  assign spm_rdata = mem[spm_addr[12:7]];
  assign srf_rdata = srf_m[srf_idx];
  always_comb for (int i = 0; i < VWR_WORDS; i++) shuf_y[i] = vwr_q[0][i] ^ vwr_q[1][i];

  always_ff @(posedge clk) begin
    if (spm_req && gnt && spm_we)
      for (int i = 0; i < VWR_WORDS; i++) if (spm_wmask[i]) mem[spm_addr[12:7]][i] <= spm_wdata[i];
    for (int v = 0; v < N_VWR; v++) if (vwr_we[v]) vwr_q[v] <= vwr_wdata;
    if (en && srf_wr) srf_m[srf_idx] <= srf_wdata;
  end

  function automatic lsu_instr_t I(lsu_op_e op, int v, int idx, int sh, int imm);
    lsu_instr_t x;
    x.op = op; x.vwr = vwr_sel_e'(v); x.srf_idx = srf_idx_t'(idx);
    x.shuf = shuf_mode_e'(sh); x.imm = 13'(imm);
    return x;
  endfunction

  lsu_instr_t prog [10];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    prog[0] = I(LSU_LDV, 0, 0, 0, 3);      // A = line 3
    prog[1] = I(LSU_LDV, 1, 0, 0, 5);      // B = line 5
    prog[2] = I(LSU_SHUF, 0, 0, 6, 0);     // C = A ^ B (stand-in), mode 6 seen
    prog[3] = I(LSU_SETA, 0, 2, 0, 1);     // AR = SRF[2] + 1 = 11
    prog[4] = I(LSU_STV, 2, 0, 0, 2);      // line 13 = C
    prog[5] = I(LSU_LDS, 0, 5, 0, 7);      // SRF[5] = line 11 word 7
    prog[6] = I(LSU_STS, 0, 6, 0, 130);    // line 12 word 2 = SRF[6]
    prog[7] = I(LSU_ADDA, 0, 0, 0, 60);    // AR = 71 mod 64 = 7
    prog[8] = I(LSU_LDV, 2, 0, 0, 0);      // C = line 7
    prog[9] = I(LSU_LDV, 0, 0, 0, 1);      // A = line AR+1 = 8, first held by grant
    for (int l = 0; l < SPM_LINES; l++) begin
      for (int i = 0; i < VWR_WORDS; i++) mem[l][i] = $urandom;
      mem0[l] = mem[l];
    end
    for (int i = 0; i < SRF_N; i++) srf_m[i] = 32'(100 + i);
    srf_m[2] = 10;

    start = 0; pm_we = 0; pc = '0; pm_waddr = '0; pm_wdata = '0; gnt = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); pm_we = 1; pm_waddr = pc_t'(i); pm_wdata = prog[i];
    end
    @(negedge clk); pm_we = 0;
    for (int i = 0; i < 9; i++) begin
      pc = pc_t'(i);
      #1;
      if (i == 2) chk(shuf_mode == SH_CSH_LO, "shuffle mode");
      if (i == 0) chk(spm_req && !spm_we && spm_addr == 13'(3*128), "LDV request");
      if (i == 6) chk(spm_req && spm_we && spm_wmask == (128'(1) << 2), "STS mask");
      @(negedge clk);
    end
    // grant refused for two cycles: nothing may change
    pc = 9; gnt = 0;
    @(negedge clk); @(negedge clk);
    chk(vwr_q[0] == mem0[3], "A held while grant refused");
    gnt = 1;
    @(negedge clk);
    chk(vwr_q[0] == mem0[8], "A = line 8 after grant");
    chk(vwr_q[1] == mem0[5], "B = line 5");
    chk(vwr_q[2] == mem0[7], "C = line 7");
    for (int i = 0; i < VWR_WORDS; i++)
      chk(mem[13][i] == (mem0[3][i] ^ mem0[5][i]), "line 13 = shuffled C");
    chk(srf_m[5] == mem0[11][7], "LDS word");
    chk(mem[12][2] == 32'd106, "STS word");
    chk(mem[12][1] == mem0[12][1] && mem[12][3] == mem0[12][3], "STS neighbours untouched");
    start = 1;
    @(negedge clk); start = 0;
    pc = 8;  // LDV C, 0 with AR cleared -> line 0
    @(negedge clk);
    chk(vwr_q[2] == mem0[0], "AR cleared by start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
