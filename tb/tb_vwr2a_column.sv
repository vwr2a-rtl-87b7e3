// tb_vwr2a_column: one column on its own, with the shared SPM modelled here
// (combinational line read, per-word write mask) and the other column's
// links driven with random words.
//
// The 13-line test kernel loads two SPM lines into VWRs A and B, runs a
// 32-iteration loop (C = A * B; k++) through the LCU counter and branch,
// stores C, stores the bit-reversal shuffle of A|B, adds the side links into
// an RC register and writes A + side back into VWR B at k = 5, stores B,
// sends RC0's result through the SRF and stores that single word with STS.
// Every stored line is compared with values computed here from the inputs.
//
// The kernel runs twice: once with the SPM port always granted, where it
// must take exactly 75 cycles (one instruction per cycle), and once with
// the grant withheld at random, where it must give the same results and
// take 75 cycles plus the number of stalled cycles.
module tb_vwr2a_column;
  import vwr2a_pkg::*;
  import vwr2a_tb_pkg::*;

  localparam int NOMINAL = 2 + 2 * 32 + 9;   // 75 instructions executed

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   pm_we, start, busy, done, stalled;
  logic [PC_W-1:0]        pm_waddr;
  cfg_line_t              pm_wline;
  word_t [N_RC-1:0]       side_in, side_out;
  logic                   spm_req, spm_we, spm_gnt;
  logic [SPM_WORD_AW-1:0] spm_addr;
  logic [VWR_WORDS-1:0]   spm_wmask;
  vwr_t                   spm_wdata, spm_rdata;
  vwr_t                   mem [SPM_LINES];
  bit                     rand_gnt;
  int checks = 0, failures = 0;

  vwr2a_column dut (
    .clk(clk), .rst_n(rst_n), .pm_we(pm_we), .pm_waddr(pm_waddr), .pm_wline(pm_wline),
    .start(start), .busy(busy), .done(done), .stalled(stalled),
    .side_in(side_in), .side_out(side_out),
    .spm_req(spm_req), .spm_we(spm_we), .spm_addr(spm_addr), .spm_wmask(spm_wmask),
    .spm_wdata(spm_wdata), .spm_rdata(spm_rdata), .spm_gnt(spm_gnt));

  // SPM model
  wire [SPM_LINE_AW-1:0] line_a = spm_addr[SPM_WORD_AW-1 -: SPM_LINE_AW];
  assign spm_rdata = mem[line_a];
  always_ff @(posedge clk)
    if (spm_req && spm_gnt && spm_we)
      for (int w = 0; w < VWR_WORDS; w++)
        if (spm_wmask[w]) mem[line_a][w] <= spm_wdata[w];

  always @(negedge clk) spm_gnt = rand_gnt ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(int l, cfg_line_t c);
    @(negedge clk);
    pm_we = 1; pm_waddr = PC_W'(l); pm_wline = c;
    @(negedge clk);
    pm_we = 0;
  endtask

  function automatic int unsigned brev8(int unsigned v);
    int unsigned r;
    r = 0;
    for (int i = 0; i < 8; i++) r |= ((v >> i) & 1) << (7 - i);
    return r;
  endfunction

  task automatic load_kernel();
    cfg_line_t c;
    load(0,  line(lcu_w(LCU_SETI, 0, 0, 0, 0), lsu_w(LSU_LDV, VS_A, 0, 0, 0), mx_w(MX_SETI, 0, 0), rc_w(ALU_NOP)));
    load(1,  line(lcu_w(LCU_NOP), lsu_w(LSU_LDV, VS_B, 0, 0, 1), mx_w(MX_NOP), rc_w(ALU_NOP)));
    load(2,  line(lcu_w(LCU_ADDI, 0, 0, 0, 1), lsu_w(LSU_NOP), mx_w(MX_ADDI, 0, 1),
                  rc_w(ALU_MUL, SRC_VWRA, SRC_VWRB, VD_C)));
    load(3,  line(lcu_w(LCU_BLTI, 0, 0, 2, 32), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_NOP)));
    load(4,  line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_C, 0, 0, 2), mx_w(MX_NOP), rc_w(ALU_NOP)));
    load(5,  line(lcu_w(LCU_NOP), lsu_w(LSU_SHUF, 0, 0, SH_BREV_LO, 0), mx_w(MX_NOP), rc_w(ALU_NOP)));
    load(6,  line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_C, 0, 0, 3), mx_w(MX_NOP), rc_w(ALU_NOP)));
    load(7,  line(lcu_w(LCU_NOP), lsu_w(LSU_NOP), mx_w(MX_SETI, 0, 5),
                  rc_w(ALU_ADD, SRC_SIDE, SRC_ZERO, VD_NONE, RD_R0)));
    load(8,  line(lcu_w(LCU_NOP), lsu_w(LSU_NOP), mx_w(MX_NOP),
                  rc_w(ALU_ADD, SRC_R0, SRC_VWRA, VD_B)));
    load(9,  line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_B, 0, 0, 4), mx_w(MX_NOP), rc_w(ALU_NOP)));
    // only RC0 writes the SRF
    c = line(lcu_w(LCU_NOP), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_NOP));
    c[CFG_RC0] = rc_w(ALU_ADD, SRC_SELF, SRC_ZERO, VD_NONE, RD_NONE, 1, 2);
    load(10, c);
    load(11, line(lcu_w(LCU_NOP), lsu_w(LSU_STS, 0, 2, 0, 5 * VWR_WORDS + 7), mx_w(MX_NOP), rc_w(ALU_NOP)));
    load(12, line(lcu_w(LCU_EXIT), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_NOP)));
  endtask

  task automatic run_once(bit rg, string tag);
    vwr_t a, b, l5;
    int   cycles, stalls;
    rand_gnt = rg;
    for (int l = 0; l < SPM_LINES; l++)
      for (int w = 0; w < VWR_WORDS; w++) mem[l][w] = $urandom;
    for (int r = 0; r < N_RC; r++) side_in[r] = $urandom;
    a = mem[0]; b = mem[1]; l5 = mem[5];
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0; stalls = 0;
    while (busy) begin
      cycles++;
      if (stalled) stalls++;
      @(negedge clk);
    end
    if (rg) begin
      chk(stalls > 0, {tag, " no stall happened"});
      chk(cycles == NOMINAL + stalls,
          $sformatf("%s cycles %0d != %0d + %0d stalls", tag, cycles, NOMINAL, stalls));
    end else begin
      chk(stalls == 0, {tag, " unexpected stall"});
      chk(cycles == NOMINAL, $sformatf("%s cycles %0d != %0d", tag, cycles, NOMINAL));
    end
    for (int w = 0; w < VWR_WORDS; w++) begin
      int unsigned s, r, kk;
      word_t exp_b;
      s = brev8(w);
      r = w / SLICE_WORDS; kk = w % SLICE_WORDS;
      exp_b = (kk == 5) ? side_in[r] + a[w] : b[w];
      chk(mem[2][w] === a[w] * b[w], $sformatf("%s mul word %0d", tag, w));
      chk(mem[3][w] === ((s < VWR_WORDS) ? a[s % VWR_WORDS] : b[s % VWR_WORDS]),
          $sformatf("%s brev word %0d", tag, w));
      chk(mem[4][w] === exp_b, $sformatf("%s B write-back word %0d", tag, w));
      chk(mem[5][w] === ((w == 7) ? side_in[0] + a[5] : l5[w]), $sformatf("%s STS word %0d", tag, w));
    end
    for (int r = 0; r < N_RC; r++)
      chk(side_out[r] === ((r == 0) ? side_in[0] + a[5] : side_in[r] + a[r * SLICE_WORDS + 5]),
          $sformatf("%s side_out %0d", tag, r));
  endtask

  initial begin
    pm_we = 0; pm_waddr = '0; pm_wline = '0; start = 0; rand_gnt = 0; side_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_kernel();
    run_once(0, "granted");
    run_once(1, "random-grant");
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
