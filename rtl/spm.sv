// spm: the 32 KiB scratchpad memory shared by both columns.
//
// Dual interface (paper): a system-side port as wide as the system bus
// (32 bits), used by the DMA, and an accelerator-side port as wide as a VWR
// (4096 bits = 128 words), used by the LSUs. Organised as LINES lines of 128
// words; word address a maps to line a[12:7], word a[6:0].
//
// Wide port: one line read per cycle, and a write with a per-word mask, so
// the same port serves full-line stores (mask all ones) and single-word
// stores from the SRF. Both ports read combinationally and write at the
// rising edge; if both write the same word in one cycle the wide port wins.
// The paper builds the wide interface from several foundry SRAM macros side
// by side; here the storage is a plain array, which a synthesis flow maps to
// macros or flip-flops. No reset.
module spm
  import vwr2a_pkg::*;
#(
  parameter int unsigned LINES = SPM_LINES
) (
  input  logic                            clk,
  // system side
  input  logic                            sys_we,
  input  logic [$clog2(LINES*VWR_WORDS)-1:0] sys_addr,
  input  word_t                           sys_wdata,
  output word_t                           sys_rdata,
  // accelerator side
  input  logic [$clog2(LINES)-1:0]        wide_line,
  input  logic                            wide_we,
  input  logic [VWR_WORDS-1:0]            wide_wmask,
  input  vwr_t                            wide_wdata,
  output vwr_t                            wide_rdata
);

  localparam int unsigned WSEL = $clog2(VWR_WORDS);

  vwr_t mem [LINES];

  always_ff @(posedge clk) begin
    if (sys_we) mem[sys_addr[$bits(sys_addr)-1:WSEL]][sys_addr[WSEL-1:0]] <= sys_wdata;
    if (wide_we) begin
      for (int i = 0; i < VWR_WORDS; i++)
        if (wide_wmask[i]) mem[wide_line][i] <= wide_wdata[i];
    end
  end

  assign sys_rdata  = mem[sys_addr[$bits(sys_addr)-1:WSEL]][sys_addr[WSEL-1:0]];
  assign wide_rdata = mem[wide_line];

endmodule
