// tb_lcu: runs a nested-loop program on the loop-control unit, with the
// testbench acting as the column (PC register, an SRF model, random stall
// cycles), and compares the PC trace with one written out by hand from the
// program's structure: outer loop 3 times, inner loop SRF[3] = 4 times,
// then the data-dependent branches BEQZS/BNEZS/BNE/BEQ and EXIT.
module tb_lcu;
  import vwr2a_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       en, start, pm_we, srf_rd, branch, exit_k;
  pc_t        pc, pm_waddr, next_pc;
  lcu_instr_t pm_wdata;
  srf_idx_t   srf_idx;
  word_t      srf_rdata;
  word_t      srf_model [SRF_N];
  int         exp_trace [$];
  int checks = 0, failures = 0;

  lcu dut (.clk(clk), .rst_n(rst_n), .en(en), .start(start), .pc(pc), .pm_we(pm_we),
           .pm_waddr(pm_waddr), .pm_wdata(pm_wdata), .srf_rd(srf_rd), .srf_idx(srf_idx),
           .srf_rdata(srf_rdata), .next_pc(next_pc), .branch(branch), .exit_k(exit_k));

  assign srf_rdata = srf_model[srf_idx];

  function automatic lcu_instr_t I(lcu_op_e op, int r, int idx, int tgt, int imm);
    lcu_instr_t x;
    x.op = op; x.r = 2'(r); x.srf_idx = srf_idx_t'(idx); x.target = pc_t'(tgt);
    x.imm = 12'(imm);
    return x;
  endfunction

  lcu_instr_t prog [15];

  initial begin
    prog[0]  = I(LCU_SETI, 1, 0, 0, 0);
    prog[1]  = I(LCU_SETI, 0, 0, 0, 0);
    prog[2]  = I(LCU_ADDI, 0, 0, 0, 1);
    prog[3]  = I(LCU_BLT,  0, 3, 2, 0);      // r0 < SRF[3] (=4)
    prog[4]  = I(LCU_ADDI, 1, 0, 0, 1);
    prog[5]  = I(LCU_BLTI, 1, 0, 1, 3);      // r1 < 3
    prog[6]  = I(LCU_BEQZS, 0, 1, 8, 0);     // SRF[1] == 0 -> 8
    prog[7]  = I(LCU_JUMP, 0, 0, 9, 0);
    prog[8]  = I(LCU_SETS, 2, 2, 0, 0);      // r2 = SRF[2]
    prog[9]  = I(LCU_BNE,  2, 2, 11, 0);     // not taken
    prog[10] = I(LCU_BNEZS, 0, 4, 12, 0);    // SRF[4] != 0 -> 12
    prog[11] = I(LCU_EXIT, 0, 0, 0, 0);
    prog[12] = I(LCU_BEQ,  2, 2, 14, 0);     // taken
    prog[13] = I(LCU_EXIT, 0, 0, 0, 0);
    prog[14] = I(LCU_EXIT, 0, 0, 0, 0);

    // hand-written expected trace
    exp_trace.push_back(0);
    for (int o = 0; o < 3; o++) begin
      exp_trace.push_back(1);
      for (int i = 0; i < 4; i++) begin exp_trace.push_back(2); exp_trace.push_back(3); end
      exp_trace.push_back(4); exp_trace.push_back(5);
    end
    exp_trace.push_back(6); exp_trace.push_back(8); exp_trace.push_back(9);
    exp_trace.push_back(10); exp_trace.push_back(12); exp_trace.push_back(14);

    for (int i = 0; i < SRF_N; i++) srf_model[i] = 32'(i * 7 + 1);
    srf_model[1] = 0; srf_model[3] = 4; srf_model[2] = 32'hdead_beef; srf_model[4] = 9;

    en = 0; start = 0; pm_we = 0; pc = '0; pm_waddr = '0; pm_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 15; i++) begin
      @(negedge clk); pm_we = 1; pm_waddr = pc_t'(i); pm_wdata = prog[i];
    end
    @(negedge clk); pm_we = 0; start = 1;
    @(negedge clk); start = 0;
    begin
      int n = 0;
      bit finished = 0;
      pc = '0;
      while (!finished && n < 200) begin
        en = ($urandom_range(0, 4) != 0);
        #1;
        if (en) begin
          checks++;
          if (n >= exp_trace.size() || int'(pc) != exp_trace[n]) begin
            failures++;
            $display("FAIL step %0d pc=%0d", n, pc);
          end
          if (exit_k) finished = 1;
          n++;
        end
        @(posedge clk);
        if (en) pc = next_pc;
        @(negedge clk);
      end
      checks++;
      if (n != exp_trace.size()) begin
        failures++; $display("FAIL trace length %0d, expected %0d", n, exp_trace.size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
