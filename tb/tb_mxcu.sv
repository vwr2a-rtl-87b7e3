// tb_mxcu: runs a short program on the multiplexer-control unit and checks
// the index k after every instruction against values worked out by hand:
// set, increment with wrap-around modulo 32, load from the SRF, masked
// increment, stall (en = 0) and clear on start.
module tb_mxcu;
  import vwr2a_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        en, start, pm_we, srf_rd;
  pc_t         pc, pm_waddr;
  mxcu_instr_t pm_wdata;
  srf_idx_t    srf_idx;
  word_t       srf_rdata;
  kidx_t       k;
  word_t       srf_model [SRF_N];
  int checks = 0, failures = 0;

  mxcu dut (.clk(clk), .rst_n(rst_n), .en(en), .start(start), .pc(pc), .pm_we(pm_we),
            .pm_waddr(pm_waddr), .pm_wdata(pm_wdata), .srf_rd(srf_rd), .srf_idx(srf_idx),
            .srf_rdata(srf_rdata), .k(k));

  assign srf_rdata = srf_model[srf_idx];

  function automatic mxcu_instr_t I(mxcu_op_e op, int idx, int imm);
    mxcu_instr_t x;
    x.op = op; x.srf_idx = srf_idx_t'(idx); x.imm = kidx_t'(imm);
    return x;
  endfunction

  mxcu_instr_t prog [8];
  int          exp_k [8];   // k after executing instruction i

  initial begin
    prog[0] = I(MX_SETI, 0, 30);  exp_k[0] = 30;
    prog[1] = I(MX_ADDI, 0, 1);   exp_k[1] = 31;
    prog[2] = I(MX_ADDI, 0, 1);   exp_k[2] = 0;    // wraps
    prog[3] = I(MX_SETS, 5, 0);   exp_k[3] = 21;   // SRF[5] = 0x35 -> low 5 bits = 21
    prog[4] = I(MX_NOP, 0, 0);    exp_k[4] = 21;
    prog[5] = I(MX_ADDM, 6, 4);   exp_k[5] = 25 & 7;  // (21+4) & SRF[6]=7 -> 1
    prog[6] = I(MX_ADDI, 0, 31);  exp_k[6] = 0;    // 1 + 31 = 32 -> 0
    prog[7] = I(MX_SETI, 0, 9);   exp_k[7] = 9;
    for (int i = 0; i < SRF_N; i++) srf_model[i] = '0;
    srf_model[5] = 32'h35; srf_model[6] = 32'h7;

    en = 0; start = 0; pm_we = 0; pc = '0; pm_waddr = '0; pm_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); pm_we = 1; pm_waddr = pc_t'(i); pm_wdata = prog[i];
    end
    @(negedge clk); pm_we = 0;
    for (int i = 0; i < 8; i++) begin
      // one stalled cycle first: k must not move
      pc = pc_t'(i); en = 0;
      @(negedge clk);
      checks++;
      if (int'(k) != ((i == 0) ? 0 : exp_k[i-1])) begin failures++; $display("FAIL stall %0d", i); end
      checks++;
      if (srf_rd !== (prog[i].op inside {MX_SETS, MX_ADDM})) begin failures++; $display("FAIL srf_rd"); end
      en = 1;
      @(negedge clk);
      checks++;
      if (int'(k) != exp_k[i]) begin failures++; $display("FAIL k after %0d: %0d exp %0d", i, k, exp_k[i]); end
    end
    en = 0; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (k !== '0) begin failures++; $display("FAIL start clear"); end
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
