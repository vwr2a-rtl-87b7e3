// tb_vwr: checks the very-wide register: a one-cycle wide write of a whole
// line, the four narrow read ports at index k (word 32*s + k), narrow writes
// that touch only their own word, and that a wide write wins over the
// narrow side. A shadow copy kept in the testbench is the reference.
module tb_vwr;
  import vwr2a_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              wide_we;
  vwr_t              wide_wdata, q, shadow;
  kidx_t             k;
  logic  [N_RC-1:0]  slice_we;
  word_t [N_RC-1:0]  slice_wdata, slice_rdata;
  int checks = 0, failures = 0;

  vwr dut (.clk(clk), .rst_n(rst_n), .wide_we(wide_we), .wide_wdata(wide_wdata), .q(q),
           .k(k), .slice_we(slice_we), .slice_wdata(slice_wdata), .slice_rdata(slice_rdata));

  task automatic compare_all();
    checks++;
    if (q !== shadow) begin failures++; $display("FAIL wide contents"); end
    for (int kk = 0; kk < SLICE_WORDS; kk++) begin
      k = kidx_t'(kk);
      #1;
      for (int s = 0; s < N_RC; s++) begin
        checks++;
        if (slice_rdata[s] !== shadow[s*32 + kk]) begin
          failures++;
          $display("FAIL slice %0d k=%0d", s, kk);
        end
      end
    end
  endtask

  initial begin
    wide_we = 0; slice_we = '0; k = '0; wide_wdata = '0; slice_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      // wide write
      for (int i = 0; i < VWR_WORDS; i++) wide_wdata[i] = $urandom;
      @(negedge clk); wide_we = 1;
      @(negedge clk); wide_we = 0;
      shadow = wide_wdata;
      compare_all();
      // narrow writes at random k, random slice subset
      for (int n = 0; n < 20; n++) begin
        @(negedge clk);
        k = kidx_t'($urandom_range(0, 31));
        slice_we = N_RC'($urandom);
        for (int s = 0; s < N_RC; s++) begin
          slice_wdata[s] = $urandom;
          if (slice_we[s]) shadow[s*32 + int'(k)] = slice_wdata[s];
        end
        @(negedge clk);
        slice_we = '0;
      end
      compare_all();
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
