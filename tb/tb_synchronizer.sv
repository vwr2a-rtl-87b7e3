// tb_synchronizer: the synchronizer with a real configuration memory and
// behavioural columns and DMA around it, driven over its AHB slave port.
//
// Checks: configuration-memory writes land at the addressed line/word; a
// launch copies the right lines into the right column at the right program
// addresses and starts all selected columns in one cycle; a second launch
// while a column is busy is rejected (flag and interrupt); "kernel done" is
// raised only when every column of a launch has finished, and separately
// for two single-column launches; DMA registers read back and go produces
// one start pulse with their values; flags clear by write-one; the
// interrupt follows the enable mask.
module tb_synchronizer;
  import vwr2a_pkg::*;

  localparam int CLINES = 256;
  localparam int CLW    = $clog2(CLINES);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        hsel, hwrite, hready, hreadyout, hresp, irq;
  logic [31:0] haddr, hwdata, hrdata;
  logic [1:0]  htrans;
  logic        cfg_we;
  logic [CLW-1:0] cfg_wline, cfg_rline;
  logic [$clog2(CFG_WORDS)-1:0] cfg_wword;
  word_t       cfg_wdata;
  cfg_line_t   cfg_rdata, pm_wline;
  logic [N_COL-1:0] pm_we, col_start, col_busy, col_done;
  logic [PC_W-1:0]  pm_waddr;
  logic        dma_start, dma_dir, dma_busy, dma_done, dma_err;
  logic [31:0] dma_sys;
  logic [SPM_WORD_AW-1:0] dma_spm;
  logic [15:0] dma_len;

  cfg_line_t   golden [CLINES];
  cfg_line_t   pm_img [N_COL][PM_DEPTH];
  int          pm_cnt [N_COL];
  int          start_cyc [N_COL];
  int          cyc = 0;
  int          run_len [N_COL];
  int          dma_starts = 0;
  logic [31:0] last_dma_sys;
  logic [15:0] last_dma_len;
  int checks = 0, failures = 0;

  synchronizer #(.CFG_LINES(CLINES)) dut (
    .clk(clk), .rst_n(rst_n), .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hsize(3'd2), .hwdata(hwdata), .hready(hready), .hrdata(hrdata), .hreadyout(hreadyout),
    .hresp(hresp), .irq(irq), .cfg_we(cfg_we), .cfg_wline(cfg_wline), .cfg_wword(cfg_wword),
    .cfg_wdata(cfg_wdata), .cfg_rline(cfg_rline), .cfg_rdata(cfg_rdata), .pm_we(pm_we),
    .pm_waddr(pm_waddr), .pm_wline(pm_wline), .col_start(col_start), .col_busy(col_busy),
    .col_done(col_done), .dma_start(dma_start), .dma_dir(dma_dir), .dma_sys(dma_sys),
    .dma_spm(dma_spm), .dma_len(dma_len), .dma_busy(dma_busy), .dma_done(dma_done),
    .dma_err(dma_err));

  config_mem #(.LINES(CLINES)) u_cfg (
    .clk(clk), .we(cfg_we), .wline(cfg_wline), .wword(cfg_wword), .wdata(cfg_wdata),
    .rline(cfg_rline), .rdata(cfg_rdata));

  assign hready = hreadyout;

  // behavioural columns: record program writes, run run_len[c] cycles
  always @(posedge clk) begin
    cyc <= cyc + 1;
    col_done <= '0;
    for (int c = 0; c < N_COL; c++) begin
      if (pm_we[c]) begin
        pm_img[c][pm_waddr] <= pm_wline;
        pm_cnt[c] <= pm_cnt[c] + 1;
      end
      if (col_start[c]) begin
        col_busy[c]  <= 1'b1;
        start_cyc[c] <= cyc;
      end else if (col_busy[c] && cyc - start_cyc[c] >= run_len[c]) begin
        col_busy[c] <= 1'b0;
        col_done[c] <= 1'b1;
      end
    end
    if (dma_start) begin
      dma_starts   <= dma_starts + 1;
      last_dma_sys <= dma_sys;
      last_dma_len <= dma_len;
    end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic ahb_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    hsel = 1; htrans = 2'b10; hwrite = 1; haddr = a;
    @(negedge clk);
    hsel = 0; htrans = 2'b00; hwrite = 0; hwdata = d;
    @(negedge clk);
  endtask

  task automatic ahb_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    hsel = 1; htrans = 2'b10; hwrite = 0; haddr = a;
    @(negedge clk);
    hsel = 0; htrans = 2'b00;
    d = hrdata;
  endtask

  function automatic logic [31:0] kstart(int mask, int first, int n);
    return 32'(mask) | (32'(first) << 8) | (32'(n) << 16);
  endfunction

  task automatic wait_idle();
    logic [31:0] st;
    int waited;
    waited = 0;
    do begin ahb_read(32'h04, st); waited++; end while (st[2:0] != 0 && waited < 500);
  endtask

  task automatic check_pm(int c, int first, int n, string tag);
    for (int i = 0; i < n; i++)
      chk(pm_img[c][i] === golden[first + i], $sformatf("%s col%0d pm[%0d]", tag, c, i));
  endtask

  initial begin
    logic [31:0] st, rd;
    bit seen;
    hsel = 0; htrans = 0; hwrite = 0; haddr = 0; hwdata = 0;
    col_busy = 0; col_done = 0; dma_busy = 0; dma_done = 0; dma_err = 0;
    for (int c = 0; c < N_COL; c++) begin pm_cnt[c] = 0; run_len[c] = 10; start_cyc[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // configuration memory: lines 0..19 through the slave window
    for (int l = 0; l < 20; l++)
      for (int wd = 0; wd < CFG_WORDS; wd++) begin
        golden[l][wd] = $urandom;
        ahb_write(32'h8000 + 32'(32 * l + 4 * wd), golden[l][wd]);
      end
    for (int l = 0; l < 20; l++)
      chk(u_cfg.mem[l] === golden[l], $sformatf("config line %0d", l));

    ahb_write(32'h0C, 32'h90);                       // irq on kernel done, rejected

    // launch 1: both columns, lines 2.., n = 5; column 1 runs longer
    run_len[0] = 30; run_len[1] = 60;
    ahb_write(32'h00, kstart(3, 2, 5));
    seen = 0;
    while (!seen) begin
      @(posedge clk);
      #1;
      if (col_start != 0) begin
        seen = 1;
        chk(col_start == 2'b11, "launch 1 starts both columns in one cycle");
        chk(pm_cnt[0] == 5 && pm_cnt[1] == 5, "launch 1 loads 5 lines per column first");
      end
    end
    @(negedge clk);
    check_pm(0, 2, 5, "launch 1");
    check_pm(1, 7, 5, "launch 1");
    // a second launch while busy is rejected
    ahb_write(32'h00, kstart(1, 0, 3));
    ahb_read(32'h04, st);
    chk(st[7] && irq, "reject flag and irq");
    chk(pm_cnt[0] == 5, "rejected launch loaded nothing");
    ahb_write(32'h08, 32'h80);
    ahb_read(32'h04, st);
    chk(!st[7] && !irq, "reject flag cleared");
    // column 0 finishes first: kernel done must wait for column 1
    wait (col_done[0]);
    repeat (3) @(posedge clk);
    ahb_read(32'h04, st);
    chk(!st[4] && st[1], "kernel not done while column 1 runs");
    wait_idle();
    ahb_read(32'h04, st);
    chk(st[4] && irq, "kernel done after both columns");
    ahb_write(32'h08, 32'h10);
    ahb_read(32'h04, st);
    chk(!st[4] && !irq, "kernel done cleared");

    // launch 2: column 1 alone from lines 12..14
    run_len[1] = 20;
    ahb_write(32'h00, kstart(2, 12, 3));
    repeat (3) @(posedge clk);
    wait_idle();
    check_pm(1, 12, 3, "launch 2");
    chk(pm_cnt[1] == 8 && pm_cnt[0] == 5, "launch 2 loads column 1 only");
    ahb_read(32'h04, st);
    chk(st[4], "launch 2 kernel done");
    ahb_write(32'h08, 32'h10);

    // launches 3 and 4: column 0 (long), then column 1 while column 0 runs
    run_len[0] = 80; run_len[1] = 10;
    ahb_write(32'h00, kstart(1, 0, 4));
    repeat (8) @(posedge clk);
    ahb_write(32'h00, kstart(2, 15, 2));
    ahb_read(32'h04, st);
    chk(!st[7], "independent launch accepted");
    wait (col_done[1]);
    repeat (3) @(posedge clk);
    ahb_read(32'h04, st);
    chk(st[4] && st[0], "column 1 kernel done while column 0 still runs");
    ahb_write(32'h08, 32'h10);
    wait_idle();
    ahb_read(32'h04, st);
    chk(st[4], "column 0 kernel done");
    check_pm(0, 0, 4, "launch 3");
    check_pm(1, 15, 2, "launch 4");
    ahb_write(32'h08, 32'h10);

    // DMA registers and interrupt mask
    ahb_write(32'h10, 32'h2000_0100);
    ahb_write(32'h14, 32'h0000_0123);
    ahb_write(32'h18, 32'h0000_0040);
    ahb_read(32'h10, rd); chk(rd == 32'h2000_0100, "DMA_SYS read back");
    ahb_read(32'h14, rd); chk(rd == 32'h123, "DMA_SPM read back");
    ahb_read(32'h18, rd); chk(rd == 32'h40, "DMA_LEN read back");
    ahb_write(32'h1C, 32'h3);
    @(negedge clk);
    chk(dma_starts == 1 && last_dma_sys == 32'h2000_0100 && last_dma_len == 16'h40 && dma_dir,
        "DMA start pulse");
    chk(dma_spm == 13'h123, "DMA SPM address");
    @(negedge clk); dma_done = 1; @(negedge clk); dma_done = 0;
    ahb_read(32'h04, st);
    chk(st[5] && !irq, "DMA done flag, masked irq");
    ahb_write(32'h0C, 32'h20);
    @(negedge clk);
    chk(irq, "DMA irq enabled");
    ahb_write(32'h08, 32'h20);
    @(negedge clk);
    chk(!irq, "DMA flag cleared");
    ahb_read(32'h0C, rd); chk(rd == 32'h20, "IRQEN read back");
    // a launch with n = 0 is rejected
    ahb_write(32'h00, kstart(1, 0, 0));
    ahb_read(32'h04, st);
    chk(st[7], "n = 0 rejected");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
