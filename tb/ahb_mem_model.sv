// ahb_mem_model: behavioural AHB-Lite slave memory standing in for the SoC
// SRAM in the testbenches (not synthesizable). WORDS 32-bit words at byte
// address BASE. Single transfers; when wait_en (initially WAIT) is set it inserts a random
// number (0..3) of wait states in each data phase. Out-of-range addresses
// get an ERROR response. The array is public so testbenches can preload
// and inspect it.
module ahb_mem_model #(
  parameter int unsigned WORDS = 4096,
  parameter logic [31:0] BASE  = 32'h2000_0000,
  parameter bit          WAIT  = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hwdata,
  output logic [31:0] hrdata,
  output logic        hready,
  output logic        hresp
);

  logic [31:0] mem [WORDS];
  bit          wait_en = WAIT;   // testbenches may turn wait states off
  logic        dp, dp_w, dp_bad;
  int unsigned dp_idx;
  int          wait_left;

  initial begin
    dp = 0; dp_w = 0; dp_bad = 0; dp_idx = 0; wait_left = 0;
    hready = 1; hresp = 0; hrdata = '0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      dp <= 0; hready <= 1; hresp <= 0;
    end else begin
      if (dp && wait_left > 0) begin
        wait_left <= wait_left - 1;
        if (wait_left == 1) begin
          hready <= 1;
          hresp  <= dp_bad;
          if (!dp_w && !dp_bad) hrdata <= mem[dp_idx];
        end
      end else begin
        if (dp && dp_w && !dp_bad) mem[dp_idx] <= hwdata;
        // a new address phase is accepted when hready is high
        dp <= htrans[1];
        if (htrans[1]) begin
          int unsigned idx;
          int          w;
          idx    = (haddr - BASE) >> 2;
          dp_idx <= idx;
          dp_w   <= hwrite;
          dp_bad <= (haddr < BASE) || (idx >= WORDS);
          w = wait_en ? $urandom_range(0, 3) : 0;
          wait_left <= w;
          hready <= (w == 0);
          hresp  <= (w == 0) && ((haddr < BASE) || (idx >= WORDS));
          if (w == 0 && !hwrite && haddr >= BASE && idx < WORDS) hrdata <= mem[idx];
        end else begin
          hready <= 1;
          hresp  <= 0;
        end
      end
    end
  end

endmodule
