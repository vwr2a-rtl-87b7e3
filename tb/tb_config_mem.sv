// tb_config_mem: writes random 32-bit words into the configuration memory
// one at a time (including the unused word slot 7, which must be ignored)
// and reads back whole lines, comparing with a shadow copy kept here.
module tb_config_mem;
  import vwr2a_pkg::*;

  localparam int LINES = 256;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       we;
  logic [7:0] wline, rline;
  logic [2:0] wword;
  word_t      wdata;
  cfg_line_t  rdata;
  cfg_line_t  shadow [LINES];
  int checks = 0, failures = 0;

  config_mem #(.LINES(LINES)) dut (.clk(clk), .we(we), .wline(wline), .wword(wword),
                                   .wdata(wdata), .rline(rline), .rdata(rdata));

  initial begin
    we = 0; wline = 0; wword = 0; wdata = 0; rline = 0;
    for (int l = 0; l < LINES; l++)
      for (int w = 0; w < CFG_WORDS; w++) begin
        @(negedge clk);
        we = 1; wline = 8'(l); wword = 3'(w); wdata = $urandom;
        shadow[l][w] = wdata;
      end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = 1; wline = 8'($urandom); wword = 3'($urandom); wdata = $urandom;
      if (wword < CFG_WORDS) shadow[wline][wword] = wdata;
    end
    @(negedge clk); we = 0;
    for (int l = 0; l < LINES; l++) begin
      rline = 8'(l); #1;
      checks++;
      if (rdata !== shadow[l]) begin failures++; $display("FAIL line %0d", l); end
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
