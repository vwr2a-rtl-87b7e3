// tb_dma: the DMA between a behavioural AHB memory and an SPM-side array
// kept here. Copies 50 words system -> SPM with random wait states, 30 words
// SPM -> system, checks every word, checks the transfer rate (two cycles per
// word without wait states, the engine's design), and checks that an
// out-of-range address raises err.
module tb_dma;
  import vwr2a_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start, dir, busy, done, err, spm_we;
  logic [31:0]       sys_addr;
  logic [SPM_WORD_AW-1:0] spm_addr, spm_a;
  logic [15:0]       len;
  word_t             spm_wdata, spm_rdata;
  logic [31:0]       haddr, hwdata, hrdata;
  logic [1:0]        htrans;
  logic              hwrite, hready, hresp;
  logic [2:0]        hsize, hburst;
  logic [3:0]        hprot;
  word_t             spm_m [8192];
  int checks = 0, failures = 0;

  dma dut (.clk(clk), .rst_n(rst_n), .start(start), .dir(dir), .sys_addr(sys_addr),
           .spm_addr(spm_addr), .len(len), .busy(busy), .done(done), .err(err),
           .spm_we(spm_we), .spm_a(spm_a), .spm_wdata(spm_wdata), .spm_rdata(spm_rdata),
           .haddr(haddr), .htrans(htrans), .hwrite(hwrite), .hsize(hsize), .hburst(hburst),
           .hprot(hprot), .hwdata(hwdata), .hrdata(hrdata), .hready(hready), .hresp(hresp));

  ahb_mem_model #(.WORDS(1024), .BASE(32'h2000_0000), .WAIT(1'b1)) u_mem (
    .clk(clk), .rst_n(rst_n), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hwdata(hwdata), .hrdata(hrdata), .hready(hready), .hresp(hresp));

  assign spm_rdata = spm_m[spm_a];
  always_ff @(posedge clk) if (spm_we) spm_m[spm_a] <= spm_wdata;

  task automatic run(bit d, int sa, int ma, int n, output int cycles);
    @(negedge clk);
    start = 1; dir = d; sys_addr = 32'(sa); spm_addr = 13'(ma); len = 16'(n);
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    start = 0; dir = 0; sys_addr = '0; spm_addr = '0; len = '0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 32'h5000_0000 + 32'(i * 3);
    for (int i = 0; i < 8192; i++) spm_m[i] = 32'(i) ^ 32'hA5A5_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 32'h2000_0000 + 4*10, 200, 50, cyc);
    for (int i = 0; i < 50; i++) begin
      checks++;
      if (spm_m[200 + i] !== 32'h5000_0000 + 32'((10 + i) * 3)) begin
        failures++; $display("FAIL sys->spm word %0d", i);
      end
    end
    checks++;
    if (spm_m[199] !== (32'd199 ^ 32'hA5A5_0000) || spm_m[250] !== (32'd250 ^ 32'hA5A5_0000)) begin
      failures++; $display("FAIL sys->spm overrun");
    end
    run(1, 32'h2000_0000 + 4*600, 4000, 30, cyc);
    for (int i = 0; i < 30; i++) begin
      checks++;
      if (u_mem.mem[600 + i] !== (32'(4000 + i) ^ 32'hA5A5_0000)) begin
        failures++; $display("FAIL spm->sys word %0d", i);
      end
    end
    checks++;
    if (err) begin failures++; $display("FAIL spurious err"); end
    // rate without wait states: 2 cycles per word (+1 for the start cycle)
    u_mem.wait_en = 1'b0;
    run(0, 32'h2000_0000, 1000, 40, cyc);
    checks++;
    if (cyc != 2 * 40 + 1) begin failures++; $display("FAIL rate: %0d cycles for 40 words", cyc); end
    u_mem.wait_en = 1'b1;
    // error response
    run(0, 32'h1000_0000, 0, 2, cyc);
    checks++;
    if (!err) begin failures++; $display("FAIL err not raised"); end
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
