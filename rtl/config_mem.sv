// config_mem: configuration memory holding the kernels' programs.
//
// The paper stores the configuration words here and copies them into the
// units' local program memories when a kernel starts. Its size and
// organisation are not given; this design uses LINES lines, each one column
// instruction (CFG_WORDS = 7 words of 32 bits: LCU, LSU, MXCU, RC0..RC3, in
// that order; each unit's instruction sits in the low bits of its word).
// The host writes it one 32-bit word at a time through the synchronizer's
// bus slave; the loader reads one full line per cycle. Reads are
// combinational, writes happen at the rising edge. No reset.
module config_mem
  import vwr2a_pkg::*;
#(
  parameter int unsigned LINES = 256
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(LINES)-1:0]     wline,
  input  logic [$clog2(CFG_WORDS)-1:0] wword,
  input  word_t                        wdata,
  input  logic [$clog2(LINES)-1:0]     rline,
  output cfg_line_t                    rdata
);

  cfg_line_t mem [LINES];

  always_ff @(posedge clk) begin
    if (we && 32'(wword) < CFG_WORDS) mem[wline][wword] <= wdata;
  end

  assign rdata = mem[rline];

endmodule
