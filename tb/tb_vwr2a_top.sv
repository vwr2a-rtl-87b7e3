// tb_vwr2a_top: end-to-end test of the whole accelerator at its default
// sizes, driven the way a host CPU would drive it over AHB.
//
//  1. The host writes two kernels into the configuration memory and copies
//     input vectors and a loop bound from a behavioural system SRAM into the
//     SPM with the DMA (interrupt-driven).
//  2. Kernel A runs on both columns at once (one launch, column 0 from
//     config lines 0..14, column 1 from lines 15..29). Each column loads two
//     SPM lines into VWRs A and B, runs two 32-iteration loops in the style of
//     the paper's instruction-flow example (C = A + B; A = A - B; k++), stores
//     the results, shuffles (words interleaving), multiplies in 16.15 fixed
//     point, and combines RC results through the vertical neighbour links.
//     Both LSUs use the shared SPM port at the same time, so column 1 stalls.
//     A second launch attempted while A runs must be rejected.
//  3. Kernel B runs on column 0 alone and reads, through the horizontal
//     links, the final RC results left in column 1.
//  4. The results are copied back to system memory with the DMA and
//     compared with values computed here from the input data.
// Column 0 never stalls, so its run time is checked exactly (139 cycles:
// one instruction per cycle, single-cycle 4096-bit loads and stores);
// column 1 must take 139 cycles plus its stall cycles. Every mechanism
// (stall, taken branch, rejected launch, DMA in both directions, kernel and
// DMA interrupts, shuffle, side-link read) is counted and must occur.
module tb_vwr2a_top;
  import vwr2a_pkg::*;
  import vwr2a_tb_pkg::*;

  localparam logic [31:0] SRAM = 32'h2000_0000;
  localparam logic [31:0] ACC  = 32'h4000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        s_hsel, s_hwrite, s_hreadyout, s_hresp, irq;
  logic [31:0] s_haddr, s_hwdata, s_hrdata;
  logic [1:0]  s_htrans;
  logic [2:0]  s_hsize;
  logic [31:0] m_haddr, m_hwdata, m_hrdata;
  logic [1:0]  m_htrans;
  logic        m_hwrite, m_hready, m_hresp;
  logic [2:0]  m_hsize, m_hburst;
  logic [3:0]  m_hprot;

  int checks = 0, failures = 0;

  vwr2a_top dut (
    .clk(clk), .rst_n(rst_n),
    .s_hsel(s_hsel), .s_haddr(s_haddr), .s_htrans(s_htrans), .s_hwrite(s_hwrite),
    .s_hsize(s_hsize), .s_hwdata(s_hwdata), .s_hready(s_hreadyout), .s_hrdata(s_hrdata),
    .s_hreadyout(s_hreadyout), .s_hresp(s_hresp),
    .m_haddr(m_haddr), .m_htrans(m_htrans), .m_hwrite(m_hwrite), .m_hsize(m_hsize),
    .m_hburst(m_hburst), .m_hprot(m_hprot), .m_hwdata(m_hwdata), .m_hrdata(m_hrdata),
    .m_hready(m_hready), .m_hresp(m_hresp), .irq(irq)
  );

  ahb_mem_model #(.WORDS(8192), .BASE(SRAM), .WAIT(1'b1)) u_sram (
    .clk(clk), .rst_n(rst_n), .haddr(m_haddr), .htrans(m_htrans), .hwrite(m_hwrite),
    .hwdata(m_hwdata), .hrdata(m_hrdata), .hready(m_hready), .hresp(m_hresp));

  // ------------------------------------------------------ mechanism counters
  int n_stall1, n_stall0, n_branch, n_busy0, n_busy1, n_irq_k, n_irq_d, n_reject;
  int n_dma_in, n_dma_out, n_shuffle_ok, n_side_ok;
  always @(posedge clk) if (rst_n) begin
    if (dut.col_stalled[1]) n_stall1++;
    if (dut.col_stalled[0]) n_stall0++;
    if (dut.col_busy[0]) n_busy0++;
    if (dut.col_busy[1]) n_busy1++;
    if (dut.g_col[0].u_col.lcu_branch && dut.g_col[0].u_col.en) n_branch++;
    if (dut.g_col[1].u_col.lcu_branch && dut.g_col[1].u_col.en) n_branch++;
  end

  // ---------------------------------------------------------- host tasks
  task automatic ahb_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    s_hsel = 1; s_htrans = 2'b10; s_hwrite = 1; s_haddr = a;
    @(negedge clk);
    s_hsel = 0; s_htrans = 2'b00; s_hwrite = 0; s_hwdata = d;
    @(negedge clk);
  endtask

  task automatic ahb_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    s_hsel = 1; s_htrans = 2'b10; s_hwrite = 0; s_haddr = a;
    @(negedge clk);
    s_hsel = 0; s_htrans = 2'b00;
    #1 d = s_hrdata;
  endtask

  task automatic write_line(int l, cfg_line_t c);
    for (int w = 0; w < CFG_WORDS; w++) ahb_write(ACC + 32'h8000 + 32'(l * 32 + w * 4), c[w]);
  endtask

  task automatic wait_irq(int flagbit);
    logic [31:0] st;
    int t = 0;
    while (!irq && t < 100000) begin @(negedge clk); t++; end
    ahb_read(ACC + 4, st);
    checks++;
    if (!st[flagbit]) begin failures++; $display("FAIL irq without flag %0d (status %h)", flagbit, st); end
    if (flagbit == 4) n_irq_k++; else n_irq_d++;
    ahb_write(ACC + 8, 32'(1 << flagbit));
  endtask

  task automatic dma(bit dir, int sys_word, int spm_word, int len);
    ahb_write(ACC + 32'h10, SRAM + 32'(4 * sys_word));
    ahb_write(ACC + 32'h14, 32'(spm_word));
    ahb_write(ACC + 32'h18, 32'(len));
    ahb_write(ACC + 32'h1C, {30'd0, dir, 1'b1});
    wait_irq(5);
    if (dir) n_dma_out++; else n_dma_in++;
  endtask

  // kernel A for a column whose data sits at SPM line L, loop bound at line 40
  task automatic kernel_a(int base_line, int L);
    int P;
    P = (40 - L) * 128;
    write_line(base_line + 0,  line(lcu_w(LCU_SETI, 0), lsu_w(LSU_SETA, 0, 7, 0, L), mx_w(MX_SETI, 0, 0), rc_w(ALU_NOP)));
    write_line(base_line + 1,  line(lcu_w(LCU_NOP), lsu_w(LSU_LDS, 0, 0, 0, P), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 2,  line(lcu_w(LCU_NOP), lsu_w(LSU_LDV, VS_A, 0, 0, 0), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 3,  line(lcu_w(LCU_NOP), lsu_w(LSU_LDV, VS_B, 0, 0, 1), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 4,  line(lcu_w(LCU_ADDI, 0, 0, 0, 1), lsu_w(LSU_NOP), mx_w(MX_NOP),
                                    rc_w(ALU_ADD, SRC_VWRA, SRC_VWRB, VD_C)));
    write_line(base_line + 5,  line(lcu_w(LCU_BLT, 0, 0, 4), lsu_w(LSU_NOP), mx_w(MX_ADDI, 0, 1),
                                    rc_w(ALU_SUB, SRC_VWRA, SRC_VWRB, VD_A)));
    write_line(base_line + 6,  line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_C, 0, 0, 2), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 7,  line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_A, 0, 0, 3), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 8,  line(lcu_w(LCU_NOP), lsu_w(LSU_SHUF, 0, 0, SH_ILV_LO, 0), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 9,  line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_C, 0, 0, 4), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 10, line(lcu_w(LCU_ADDI, 1, 0, 0, 1), lsu_w(LSU_NOP), mx_w(MX_ADDI, 0, 1),
                                    rc_w(ALU_MULFP, SRC_VWRA, SRC_VWRB, VD_C)));
    write_line(base_line + 11, line(lcu_w(LCU_BLTI, 1, 0, 10, 32), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 12, line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_C, 0, 0, 5), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(base_line + 13, line(lcu_w(LCU_NOP), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_XOR, SRC_SELF, SRC_UP)));
    write_line(base_line + 14, line(lcu_w(LCU_EXIT), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_NOP)));
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  word_t a_in [2][128], b_in [2][128], fin [2][N_RC];

  initial begin
    logic [31:0] st;
    int out_base [2];
    n_stall1 = 0; n_stall0 = 0; n_branch = 0; n_busy0 = 0; n_busy1 = 0; n_irq_k = 0;
    n_irq_d = 0; n_reject = 0; n_dma_in = 0; n_dma_out = 0; n_shuffle_ok = 0; n_side_ok = 0;
    s_hsel = 0; s_haddr = '0; s_htrans = '0; s_hwrite = 0; s_hsize = 3'b010; s_hwdata = '0;
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < 128; i++) begin
        a_in[c][i] = $urandom; b_in[c][i] = $urandom;
        u_sram.mem[c * 256 + i]       = a_in[c][i];
        u_sram.mem[c * 256 + 128 + i] = b_in[c][i];
      end
    u_sram.mem[512] = 32;
    repeat (3) @(posedge clk);
    rst_n = 1;

    ahb_write(ACC + 32'h0C, 32'hB0);            // interrupts: kernel, DMA, reject
    kernel_a(0, 0);
    kernel_a(15, 16);
    write_line(30, line(lcu_w(LCU_NOP), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_ADD, SRC_SIDE, SRC_ZERO, VD_C)));
    write_line(31, line(lcu_w(LCU_NOP), lsu_w(LSU_STV, VS_C, 0, 0, 6), mx_w(MX_NOP), rc_w(ALU_NOP)));
    write_line(32, line(lcu_w(LCU_EXIT), lsu_w(LSU_NOP), mx_w(MX_NOP), rc_w(ALU_NOP)));

    dma(0, 0, 0, 256);          // column 0 data -> lines 0, 1
    dma(0, 256, 16 * 128, 256); // column 1 data -> lines 16, 17
    dma(0, 512, 40 * 128, 1);   // loop bound -> line 40 word 0

    // kernel A on both columns
    n_busy0 = 0; n_busy1 = 0; n_stall1 = 0;
    ahb_write(ACC + 0, {9'd0, 7'd15, 8'd0, 6'd0, 2'b11});
    ahb_write(ACC + 0, {9'd0, 7'd3, 8'd30, 6'd0, 2'b01});   // must be rejected
    ahb_read(ACC + 4, st);
    if (st[7]) n_reject++;
    ahb_write(ACC + 8, 32'h80);
    wait_irq(4);
    chk(n_busy0 == 139, $sformatf("column 0 run time %0d cycles, expected 139", n_busy0));
    chk(n_busy1 == 139 + n_stall1, $sformatf("column 1 run time %0d != 139 + %0d stalls", n_busy1, n_stall1));
    chk(n_stall0 == 0, "column 0 stalled");

    // expected final RC results (left in the result registers)
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < N_RC; r++) begin
        word_t me, up;
        me = mulfp_ref(a_in[c][r*32+31] - b_in[c][r*32+31], b_in[c][r*32+31]);
        up = (r == 0) ? '0 : mulfp_ref(a_in[c][(r-1)*32+31] - b_in[c][(r-1)*32+31], b_in[c][(r-1)*32+31]);
        fin[c][r] = me ^ up;
      end

    // kernel B on column 0 only: reads column 1's RC results sideways
    ahb_write(ACC + 0, {9'd0, 7'd3, 8'd30, 6'd0, 2'b01});
    wait_irq(4);

    dma(1, 1024, 2 * 128, 5 * 128);   // column 0 lines 2..6 -> sram 1024..
    dma(1, 2048, 18 * 128, 4 * 128);  // column 1 lines 18..21 -> sram 2048..
    out_base[0] = 1024; out_base[1] = 2048;

    for (int c = 0; c < 2; c++) begin
      int o;
      o = out_base[c];
      for (int i = 0; i < 128; i++) begin
        word_t d;
        d = a_in[c][i] - b_in[c][i];
        chk(u_sram.mem[o + i] == a_in[c][i] + b_in[c][i], $sformatf("col %0d sum %0d", c, i));
        chk(u_sram.mem[o + 128 + i] == d, $sformatf("col %0d diff %0d", c, i));
        chk(u_sram.mem[o + 384 + i] == mulfp_ref(d, b_in[c][i]), $sformatf("col %0d mulfp %0d", c, i));
      end
      for (int i = 0; i < 64; i++) begin
        bit ok;
        ok = (u_sram.mem[o + 256 + 2*i] == a_in[c][i] - b_in[c][i]) &&
                 (u_sram.mem[o + 256 + 2*i + 1] == b_in[c][i]);
        chk(ok, $sformatf("col %0d interleave %0d", c, i));
        if (ok) n_shuffle_ok++;
      end
    end
    for (int r = 0; r < N_RC; r++) begin
      bit ok;
      ok = (u_sram.mem[1024 + 512 + r*32] == fin[1][r]);
      chk(ok, $sformatf("side link row %0d", r));
      if (ok) n_side_ok++;
      chk(u_sram.mem[1024 + 512 + r*32 + 1] == mulfp_ref(a_in[0][r*32+1] - b_in[0][r*32+1], b_in[0][r*32+1]),
          "kernel B left other words of C");
    end

    // every mechanism must have happened
    chk(n_stall1 > 0,  "no SPM-port stall");
    chk(n_branch >= 4 * 31, $sformatf("taken branches %0d", n_branch));
    chk(n_reject == 1, "launch while busy not rejected");
    chk(n_irq_k == 2,  "kernel interrupts");
    chk(n_irq_d == 5,  "DMA interrupts");
    chk(n_dma_in == 3 && n_dma_out == 2, "DMA transfers");
    chk(n_shuffle_ok == 128, "shuffle");
    chk(n_side_ok == N_RC, "side links");
    $display("mechanisms: stalls=%0d branches=%0d rejects=%0d kirq=%0d dirq=%0d dma_in=%0d dma_out=%0d",
             n_stall1, n_branch, n_reject, n_irq_k, n_irq_d, n_dma_in, n_dma_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
