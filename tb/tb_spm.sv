// tb_spm: random traffic on both SPM ports (32-bit system port, 4096-bit
// masked wide port) compared with a shadow array kept here, including
// same-cycle writes to the same word, where the wide port must win.
module tb_spm;
  import vwr2a_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                         sys_we, wide_we;
  logic [SPM_WORD_AW-1:0]       sys_addr;
  word_t                        sys_wdata, sys_rdata;
  logic [SPM_LINE_AW-1:0]       wide_line;
  logic [VWR_WORDS-1:0]         wide_wmask;
  vwr_t                         wide_wdata, wide_rdata;
  vwr_t                         shadow [SPM_LINES];
  int checks = 0, failures = 0;

  spm dut (.clk(clk), .sys_we(sys_we), .sys_addr(sys_addr), .sys_wdata(sys_wdata),
           .sys_rdata(sys_rdata), .wide_line(wide_line), .wide_we(wide_we),
           .wide_wmask(wide_wmask), .wide_wdata(wide_wdata), .wide_rdata(wide_rdata));

  initial begin
    sys_we = 0; wide_we = 0; sys_addr = '0; sys_wdata = '0; wide_line = '0;
    wide_wmask = '0; wide_wdata = '0;
    // initialise every line through the wide port
    for (int l = 0; l < SPM_LINES; l++) begin
      @(negedge clk);
      wide_line = 6'(l); wide_we = 1; wide_wmask = '1;
      for (int i = 0; i < VWR_WORDS; i++) wide_wdata[i] = $urandom;
      shadow[l] = wide_wdata;
    end
    @(negedge clk); wide_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      sys_we = 1'($urandom); wide_we = 1'($urandom);
      wide_line = 6'($urandom);
      sys_addr = (n % 7 == 0) ? {wide_line, 7'($urandom)} : 13'($urandom);
      sys_wdata = $urandom;
      for (int i = 0; i < VWR_WORDS; i++) wide_wdata[i] = $urandom;
      wide_wmask = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks += 2;
      if (sys_rdata !== shadow[sys_addr[12:7]][sys_addr[6:0]]) begin failures++; $display("FAIL sys read"); end
      if (wide_rdata !== shadow[wide_line]) begin failures++; $display("FAIL wide read"); end
      if (sys_we) shadow[sys_addr[12:7]][sys_addr[6:0]] = sys_wdata;
      if (wide_we)
        for (int i = 0; i < VWR_WORDS; i++) if (wide_wmask[i]) shadow[wide_line][i] = wide_wdata[i];
    end
    @(negedge clk); sys_we = 0; wide_we = 0;
    for (int l = 0; l < SPM_LINES; l++) begin
      wide_line = 6'(l); #1;
      checks++;
      if (wide_rdata !== shadow[l]) begin failures++; $display("FAIL final line %0d", l); end
    end
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
