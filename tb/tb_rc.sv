// tb_rc: loads random instructions into the RC's 64-word program memory,
// then steps the PC over them with random operand inputs and compares, cycle
// by cycle, the VWR write enables and data, the SRF request, the result
// register and the local register file against a model kept here. Also
// checks that en = 0 freezes the cell.
module tb_rc;
  import vwr2a_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              en, pm_we;
  pc_t               pc, pm_waddr;
  rc_instr_t         pm_wdata;
  word_t [N_VWR-1:0] vwr_rdata;
  word_t             srf_rdata, up_in, down_in, side_in, res, vwr_wdata, srf_wdata;
  logic [N_VWR-1:0]  vwr_we;
  logic              srf_rd, srf_wr;
  srf_idx_t          srf_idx;

  rc_instr_t prog [PM_DEPTH];
  word_t     m_rf [2];
  word_t     m_res;
  int checks = 0, failures = 0;

  rc dut (.clk(clk), .rst_n(rst_n), .en(en), .pc(pc), .pm_we(pm_we), .pm_waddr(pm_waddr),
          .pm_wdata(pm_wdata), .vwr_rdata(vwr_rdata), .srf_rdata(srf_rdata), .up_in(up_in),
          .down_in(down_in), .side_in(side_in), .res(res), .vwr_we(vwr_we),
          .vwr_wdata(vwr_wdata), .srf_rd(srf_rd), .srf_wr(srf_wr), .srf_idx(srf_idx),
          .srf_wdata(srf_wdata));

  function automatic word_t alu(alu_op_e o, word_t x, word_t z);
    longint p;
    p = longint'(signed'(x)) * longint'(signed'(z));
    case (o)
      ALU_ADD: return x + z;             ALU_SUB:   return x - z;
      ALU_MUL: return word_t'(p);        ALU_MULFP: return word_t'(p >>> 16);
      ALU_AND: return x & z;             ALU_OR:    return x | z;
      ALU_XOR: return x ^ z;             ALU_SLL:   return x << z[4:0];
      ALU_SRL: return x >> z[4:0];       ALU_SRA:   return word_t'(signed'(x) >>> z[4:0]);
      default: return '0;
    endcase
  endfunction

  function automatic word_t src(rc_src_e s);
    case (s)
      SRC_VWRA: return vwr_rdata[0]; SRC_VWRB: return vwr_rdata[1];
      SRC_VWRC: return vwr_rdata[2]; SRC_SRF:  return srf_rdata;
      SRC_R0:   return m_rf[0];      SRC_R1:   return m_rf[1];
      SRC_SELF: return m_res;        SRC_UP:   return up_in;
      SRC_DOWN: return down_in;      SRC_SIDE: return side_in;
      default:  return '0;
    endcase
  endfunction

  initial begin
    en = 0; pm_we = 0; pc = '0; pm_waddr = '0; pm_wdata = '0;
    vwr_rdata = '0; srf_rdata = '0; up_in = '0; down_in = '0; side_in = '0;
    m_rf[0] = '0; m_rf[1] = '0; m_res = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // program load
    for (int i = 0; i < PM_DEPTH; i++) begin
      rc_instr_t ins;
      ins.op      = alu_op_e'((i % 8 == 7) ? 0 : $urandom_range(1, 10));
      ins.src_a   = rc_src_e'($urandom_range(0, 10));
      ins.src_b   = rc_src_e'($urandom_range(0, 10));
      ins.vwr_dst = vwr_dst_e'($urandom_range(0, 3));
      ins.rf_dst  = rf_dst_e'($urandom_range(0, 2));
      ins.srf_we  = 1'($urandom);
      ins.srf_idx = srf_idx_t'($urandom);
      prog[i] = ins;
      @(negedge clk);
      pm_we = 1; pm_waddr = pc_t'(i); pm_wdata = ins;
    end
    @(negedge clk); pm_we = 0;
    // execution, three passes over the program
    for (int step = 0; step < 3 * PM_DEPTH; step++) begin
      rc_instr_t ins;
      word_t a, b, y;
      logic act;
      @(negedge clk);
      pc = pc_t'(step % PM_DEPTH);
      en = (step % 5 != 4);
      for (int v = 0; v < N_VWR; v++) vwr_rdata[v] = $urandom;
      srf_rdata = $urandom; up_in = $urandom; down_in = $urandom; side_in = $urandom;
      #1;
      ins = prog[step % PM_DEPTH];
      act = (ins.op != ALU_NOP);
      a = src(ins.src_a); b = src(ins.src_b);
      y = alu(ins.op, a, b);
      checks++;
      if (act && vwr_wdata !== y) begin failures++; $display("FAIL y pc=%0d", pc); end
      checks++;
      if (vwr_we !== ((en && act && ins.vwr_dst != VD_NONE) ? 3'(1 << (ins.vwr_dst - 1)) : 3'b0)) begin
        failures++; $display("FAIL vwr_we pc=%0d", pc);
      end
      checks++;
      if (srf_wr !== (act && ins.srf_we) || srf_idx !== ins.srf_idx ||
          srf_rd !== (act && (ins.src_a == SRC_SRF || ins.src_b == SRC_SRF))) begin
        failures++; $display("FAIL srf request pc=%0d", pc);
      end
      if (en && act) begin
        m_res = y;
        if (ins.rf_dst == RD_R0) m_rf[0] = y;
        if (ins.rf_dst == RD_R1) m_rf[1] = y;
      end
      @(posedge clk); #1;
      checks++;
      if (res !== m_res) begin failures++; $display("FAIL res pc=%0d %h %h", pc, res, m_res); end
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
