// prog_mem: local program memory of one unit of a column (RC, LCU, LSU or
// MXCU).
//
// DEPTH words of W bits (the paper gives 64 words for each RC; this design
// uses the same depth for the three specialised slots). The synchronizer
// writes it one word per cycle through the write port when a kernel is
// launched; the column's shared program counter reads it combinationally, so
// the instruction for PC is available in the same cycle. No reset: the
// contents are always written before a kernel runs.
module prog_mem #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
