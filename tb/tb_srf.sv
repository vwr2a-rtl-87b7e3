// tb_srf: checks the single-port scalar register file: writes from each
// requester slot, read broadcast to several readers of the same entry,
// read-old-value when a write to the same entry happens in the same cycle,
// no effect while en is low, and reset to zero. A reference array kept here
// is the model.
module tb_srf;
  import vwr2a_pkg::*;

  localparam int N = 3 + N_RC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  logic     [N-1:0] rd, wr;
  srf_idx_t [N-1:0] idx;
  word_t    [N-1:0] wdata;
  word_t            rdata;
  word_t            model [SRF_N];
  int checks = 0, failures = 0;

  srf #(.N_REQ(N)) dut (.clk(clk), .rst_n(rst_n), .en(en), .rd(rd), .wr(wr), .idx(idx),
                        .wdata(wdata), .rdata(rdata));

  task automatic idle();
    rd = '0; wr = '0; idx = '0; wdata = '0;
  endtask

  task automatic read_check(int who, int e);
    idle();
    rd[who] = 1; idx[who] = srf_idx_t'(e);
    #1;
    checks++;
    if (rdata !== model[e]) begin
      failures++; $display("FAIL read e=%0d got %h exp %h", e, rdata, model[e]);
    end
  endtask

  initial begin
    en = 1; idle();
    for (int i = 0; i < SRF_N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int e = 0; e < SRF_N; e++) read_check(e % N, e);   // reset values
    for (int n = 0; n < 200; n++) begin
      int w, e;
      @(negedge clk);
      idle();
      w = $urandom_range(0, N-1);
      e = $urandom_range(0, SRF_N-1);
      wr[w] = 1; idx[w] = srf_idx_t'(e); wdata[w] = $urandom;
      // a second unit reads the same entry in the same cycle: sees old value
      rd[(w+1)%N] = 1; idx[(w+1)%N] = srf_idx_t'(e);
      en = ($urandom_range(0, 3) != 0);
      #1;
      checks++;
      if (rdata !== model[e]) begin failures++; $display("FAIL same-cycle read"); end
      if (en) model[e] = wdata[w];
      @(negedge clk);
      en = 1;
      read_check($urandom_range(0, N-1), $urandom_range(0, SRF_N-1));
      // broadcast: three readers of one entry
      idle();
      e = $urandom_range(0, SRF_N-1);
      for (int r = 0; r < 3; r++) begin rd[r*2] = 1; idx[r*2] = srf_idx_t'(e); end
      #1;
      checks++;
      if (rdata !== model[e]) begin failures++; $display("FAIL broadcast"); end
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
