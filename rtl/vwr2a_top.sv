// vwr2a_top: the VWR2A accelerator as seen by an AHB-based SoC.
//
// Contents (paper, Fig. 1): a synchronizer with the AHB slave port and the
// interrupt line, a DMA with the AHB master port, the 32 KiB shared SPM, the
// configuration memory, and the reconfigurable array of two columns, each
// with four RCs, three VWRs, a shuffle unit, an SRF, an LCU, an LSU and an
// MXCU. The two columns' RCs are linked row by row.
//
// Data path of a typical kernel: the host programs the configuration
// memory and asks the DMA to copy input data from system memory into the
// SPM; it then launches the kernel on one or both columns. The LSUs move
// whole 4096-bit SPM lines into the VWRs, the RCs compute on a quarter of
// each VWR, the results are stored back to the SPM, and the DMA copies them
// out. irq rises when the enabled completion flags are set.
//
// SPM wide-port sharing (this design's choice): column 0 has fixed priority;
// column 1 is stalled for a cycle in which both LSUs access the SPM.
// Timing: single clock, active-low asynchronous reset.
//
// Lint note: the reset is reported as used both asynchronously and
// synchronously because the assertions in the SRF and VWRs are disabled by
// it on the clock edge; the flip-flops all reset asynchronously.
module vwr2a_top
  import vwr2a_pkg::*;
#(
  parameter int unsigned CFG_LINES  = 256,
  parameter int unsigned SPM_NLINES = SPM_LINES,
  parameter int unsigned PM_WORDS   = PM_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // AHB-Lite slave (requests from the CPU)
  input  logic        s_hsel,
  input  logic [31:0] s_haddr,
  input  logic [1:0]  s_htrans,
  input  logic        s_hwrite,
  input  logic [2:0]  s_hsize,
  input  logic [31:0] s_hwdata,
  input  logic        s_hready,
  output logic [31:0] s_hrdata,
  output logic        s_hreadyout,
  output logic        s_hresp,
  // AHB-Lite master (DMA)
  output logic [31:0] m_haddr,
  output logic [1:0]  m_htrans,
  output logic        m_hwrite,
  output logic [2:0]  m_hsize,
  output logic [2:0]  m_hburst,
  output logic [3:0]  m_hprot,
  output logic [31:0] m_hwdata,
  input  logic [31:0] m_hrdata,
  input  logic        m_hready,
  input  logic        m_hresp,
  // interrupt to the CPU
  output logic        irq
);

  localparam int unsigned SPM_AW = $clog2(SPM_NLINES * VWR_WORDS);
  localparam int unsigned CLW    = $clog2(CFG_LINES);
  localparam int unsigned PW     = $clog2(PM_WORDS);
  localparam int unsigned WSEL   = $clog2(VWR_WORDS);

  // configuration memory
  logic                         cfg_we;
  logic [CLW-1:0]               cfg_wline, cfg_rline;
  logic [$clog2(CFG_WORDS)-1:0] cfg_wword;
  word_t                        cfg_wdata;
  cfg_line_t                    cfg_rdata;

  // columns
  logic [N_COL-1:0] pm_we, col_start, col_busy, col_done, col_stalled;
  logic [PW-1:0]    pm_waddr;
  cfg_line_t        pm_wline;
  word_t [N_COL-1:0][N_RC-1:0] side;

  logic [N_COL-1:0]                  c_req, c_we, c_gnt;
  logic [N_COL-1:0][SPM_WORD_AW-1:0] c_addr;
  logic [N_COL-1:0][VWR_WORDS-1:0]   c_wmask;
  vwr_t [N_COL-1:0]                  c_wdata;
  vwr_t                              spm_rline;

  // DMA
  logic              dma_start, dma_dir, dma_busy, dma_done, dma_err;
  logic [31:0]       dma_sys;
  logic [SPM_AW-1:0] dma_spm;
  logic [15:0]       dma_len;
  logic              d_we;
  logic [SPM_AW-1:0] d_addr;
  word_t             d_wdata, d_rdata;

  synchronizer #(.CFG_LINES(CFG_LINES), .PM_WORDS(PM_WORDS), .SPM_AW(SPM_AW)) u_sync (
    .clk(clk), .rst_n(rst_n),
    .hsel(s_hsel), .haddr(s_haddr), .htrans(s_htrans), .hwrite(s_hwrite), .hsize(s_hsize),
    .hwdata(s_hwdata), .hready(s_hready), .hrdata(s_hrdata), .hreadyout(s_hreadyout),
    .hresp(s_hresp), .irq(irq),
    .cfg_we(cfg_we), .cfg_wline(cfg_wline), .cfg_wword(cfg_wword), .cfg_wdata(cfg_wdata),
    .cfg_rline(cfg_rline), .cfg_rdata(cfg_rdata),
    .pm_we(pm_we), .pm_waddr(pm_waddr), .pm_wline(pm_wline),
    .col_start(col_start), .col_busy(col_busy), .col_done(col_done),
    .dma_start(dma_start), .dma_dir(dma_dir), .dma_sys(dma_sys), .dma_spm(dma_spm),
    .dma_len(dma_len), .dma_busy(dma_busy), .dma_done(dma_done), .dma_err(dma_err)
  );

  config_mem #(.LINES(CFG_LINES)) u_cfg (
    .clk(clk), .we(cfg_we), .wline(cfg_wline), .wword(cfg_wword), .wdata(cfg_wdata),
    .rline(cfg_rline), .rdata(cfg_rdata)
  );

  dma #(.SPM_AW(SPM_AW)) u_dma (
    .clk(clk), .rst_n(rst_n),
    .start(dma_start), .dir(dma_dir), .sys_addr(dma_sys), .spm_addr(dma_spm), .len(dma_len),
    .busy(dma_busy), .done(dma_done), .err(dma_err),
    .spm_we(d_we), .spm_a(d_addr), .spm_wdata(d_wdata), .spm_rdata(d_rdata),
    .haddr(m_haddr), .htrans(m_htrans), .hwrite(m_hwrite), .hsize(m_hsize),
    .hburst(m_hburst), .hprot(m_hprot), .hwdata(m_hwdata), .hrdata(m_hrdata),
    .hready(m_hready), .hresp(m_hresp)
  );

  // SPM wide port: column 0 first, column 1 waits
  logic g1;
  assign g1       = c_req[1] && !c_req[0];
  assign c_gnt[0] = 1'b1;
  assign c_gnt[1] = !c_req[0];

  logic [SPM_WORD_AW-1:0] w_addr;
  assign w_addr = g1 ? c_addr[1] : c_addr[0];

  spm #(.LINES(SPM_NLINES)) u_spm (
    .clk(clk),
    .sys_we(d_we), .sys_addr(d_addr), .sys_wdata(d_wdata), .sys_rdata(d_rdata),
    .wide_line(w_addr[WSEL +: $clog2(SPM_NLINES)]),
    .wide_we(g1 ? c_we[1] : (c_req[0] && c_we[0])),
    .wide_wmask(g1 ? c_wmask[1] : c_wmask[0]),
    .wide_wdata(g1 ? c_wdata[1] : c_wdata[0]),
    .wide_rdata(spm_rline)
  );

  for (genvar c = 0; c < N_COL; c++) begin : g_col
    vwr2a_column #(.PM_WORDS(PM_WORDS)) u_col (
      .clk(clk), .rst_n(rst_n),
      .pm_we(pm_we[c]), .pm_waddr(pm_waddr), .pm_wline(pm_wline),
      .start(col_start[c]), .busy(col_busy[c]), .done(col_done[c]),
      .stalled(col_stalled[c]),
      .side_in(side[N_COL-1-c]), .side_out(side[c]),
      .spm_req(c_req[c]), .spm_we(c_we[c]), .spm_addr(c_addr[c]),
      .spm_wmask(c_wmask[c]), .spm_wdata(c_wdata[c]), .spm_rdata(spm_rline),
      .spm_gnt(c_gnt[c])
    );
  end

endmodule
