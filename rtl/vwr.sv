// vwr: one very-wide register (4096 bits, 128 words of 32 bits) with its
// read multiplexers towards the RCs.
//
// The VWR has an asymmetric interface (paper): a wide side that the LSU
// fills from, or empties to, a full SPM line (or the shuffle unit output) in
// one cycle, and a narrow side where each of the four RCs of the column sees
// one quarter of the register (32 words). All RCs use the same word index k
// within their quarter, supplied by the MXCU (paper); the same index is used
// when an RC writes a result back. The narrow read is combinational
// (rdata_slice[s] = word 32*s + k); writes happen at the rising edge.
//
// The paper builds the VWRs from standard-cell latches; this model uses
// flip-flops and has no reset (the contents are data, written before use).
// Its cells are single-ported: a wide write and a narrow write in the same
// cycle is a programming error, caught by an assertion; the wide write wins.
module vwr
  import vwr2a_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // wide side
  input  logic              wide_we,
  input  vwr_t              wide_wdata,
  output vwr_t              q,
  // narrow side, one port per RC slice
  input  kidx_t             k,
  input  logic  [N_RC-1:0]  slice_we,
  input  word_t [N_RC-1:0]  slice_wdata,
  output word_t [N_RC-1:0]  slice_rdata
);

  vwr_t data;

  always_ff @(posedge clk) begin
    if (wide_we) begin
      data <= wide_wdata;
    end else begin
      for (int s = 0; s < N_RC; s++)
        if (slice_we[s]) data[s*SLICE_WORDS + int'(k)] <= slice_wdata[s];
    end
  end

  always_comb begin
    for (int s = 0; s < N_RC; s++) slice_rdata[s] = data[s*SLICE_WORDS + int'(k)];
  end

  assign q = data;

  a_single_port: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(wide_we && (|slice_we)))
    else $error("vwr: wide and narrow write in the same cycle");

endmodule
