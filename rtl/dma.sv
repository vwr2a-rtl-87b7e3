// dma: moves blocks of 32-bit words between system memory (over an
// AMBA AHB-Lite master port) and the SPM's system-side port.
//
// The paper gives the DMA's role (transfers between SoC SRAM and the SPM,
// requested by the CPU through the slave port, end signalled by interrupt)
// and that it masters the AHB bus. Its insides are not given; this is the
// simplest engine that does the job. Single 32-bit transfers (HSIZE word,
// HBURST SINGLE), one at a time: an address phase (HTRANS NONSEQ) followed by
// a data phase that lasts until HREADY, so a transfer takes two cycles
// without wait states. Addresses increment by 4 bytes on the bus and by one
// word in the SPM. dir = 0 copies system memory to the SPM, dir = 1 the SPM
// to system memory. start is a one-cycle pulse and is ignored while busy;
// done pulses for one cycle after the last data phase. An ERROR response is
// recorded in err and the transfer carries on (this design's choice).
module dma
  import vwr2a_pkg::*;
#(
  parameter int unsigned SPM_AW = SPM_WORD_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  // request from the synchronizer
  input  logic              start,
  input  logic              dir,
  input  logic [31:0]       sys_addr,
  input  logic [SPM_AW-1:0] spm_addr,
  input  logic [15:0]       len,       // words
  output logic              busy,
  output logic              done,
  output logic              err,
  // SPM system-side port
  output logic              spm_we,
  output logic [SPM_AW-1:0] spm_a,
  output word_t             spm_wdata,
  input  word_t             spm_rdata,
  // AHB-Lite master
  output logic [31:0]       haddr,
  output logic [1:0]        htrans,
  output logic              hwrite,
  output logic [2:0]        hsize,
  output logic [2:0]        hburst,
  output logic [3:0]        hprot,
  output logic [31:0]       hwdata,
  input  logic [31:0]       hrdata,
  input  logic              hready,
  input  logic              hresp
);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA} state_e;

  localparam logic [1:0] HTRANS_IDLE   = 2'b00;
  localparam logic [1:0] HTRANS_NONSEQ = 2'b10;

  state_e            state;
  logic              dir_q;
  logic [31:0]       sa;
  logic [SPM_AW-1:0] ma;
  logic [15:0]       left;
  word_t             wbuf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      dir_q <= 1'b0;
      sa    <= '0;
      ma    <= '0;
      left  <= '0;
      wbuf  <= '0;
      err   <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          dir_q <= dir;
          sa    <= sys_addr;
          ma    <= spm_addr;
          left  <= len;
          err   <= 1'b0;
          if (len == 0) done  <= 1'b1;
          else          state <= S_ADDR;
        end
        S_ADDR: if (hready) begin
          wbuf  <= spm_rdata;          // used when writing to system memory
          state <= S_DATA;
        end
        S_DATA: if (hready) begin
          if (hresp) err <= 1'b1;
          sa   <= sa + 32'd4;
          ma   <= ma + 1'b1;
          left <= left - 1'b1;
          if (left == 16'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_ADDR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    haddr     = sa;
    htrans    = (state == S_ADDR) ? HTRANS_NONSEQ : HTRANS_IDLE;
    hwrite    = dir_q;
    hsize     = 3'b010;   // 32-bit
    hburst    = 3'b000;   // SINGLE
    hprot     = 4'b0011;  // non-cacheable, non-bufferable, privileged data
    hwdata    = wbuf;
    spm_a     = ma;
    spm_we    = (state == S_DATA) && hready && !dir_q;
    spm_wdata = hrdata;
  end

endmodule
