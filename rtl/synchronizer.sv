// synchronizer: host interface and kernel sequencer of VWR2A.
//
// Paper: kernel-launch and DMA requests from the CPU arrive through an AHB
// slave port; at kernel start the configuration words are copied from the
// configuration memory into the RCs' (and slots') program memories; the LCUs
// notify the synchronizer at the end of a kernel; an interrupt line tells
// the CPU that a kernel or a DMA transfer has finished; columns that work
// together have synchronised PCs. The register map, the loader sequence and
// the completion rule below are this design's own.
//
// Register map (byte offset inside the slave window; AHB-Lite, zero wait
// states, OKAY responses only):
//   0x00 KSTART  W  [1:0] column mask, [15:8] first config line,
//                   [22:16] program length n (1..64). Column 0 gets lines
//                   first..first+n-1; column 1 the next n lines if both are
//                   selected, else lines first..first+n-1.
//   0x04 STATUS  R  [1:0] column busy, [2] loading or starting, [3] DMA busy,
//                   [4] kernel done, [5] DMA done, [6] DMA bus error,
//                   [7] launch rejected (column or loader busy)
//   0x08 FLAGS   W  write 1 to clear bits [4], [5], [7] of STATUS
//   0x0C IRQEN   RW [4] kernel done, [5] DMA done, [7] rejected
//   0x10 DMA_SYS RW system byte address      0x14 DMA_SPM RW SPM word address
//   0x18 DMA_LEN RW length in words          0x1C DMA_CTRL W [0] go, [1] dir
//   0x8000 + 32*line + 4*word  W  configuration memory
// irq = |(STATUS[7:4] & IRQEN[7:4]), a level.
//
// Launch: the loader copies one configuration line per cycle (n cycles per
// column) and then starts all selected columns in the same cycle, so that
// two columns running one kernel begin in step. "Kernel done" is set when
// every column of a launch has executed EXIT.
module synchronizer
  import vwr2a_pkg::*;
#(
  parameter int unsigned CFG_LINES = 256,
  parameter int unsigned PM_WORDS  = PM_DEPTH,
  parameter int unsigned SPM_AW    = SPM_WORD_AW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // AHB-Lite slave
  input  logic                          hsel,
  input  logic [31:0]                   haddr,
  input  logic [1:0]                    htrans,
  input  logic                          hwrite,
  input  logic [2:0]                    hsize,
  input  logic [31:0]                   hwdata,
  input  logic                          hready,
  output logic [31:0]                   hrdata,
  output logic                          hreadyout,
  output logic                          hresp,
  output logic                          irq,
  // configuration memory
  output logic                          cfg_we,
  output logic [$clog2(CFG_LINES)-1:0]  cfg_wline,
  output logic [$clog2(CFG_WORDS)-1:0]  cfg_wword,
  output word_t                         cfg_wdata,
  output logic [$clog2(CFG_LINES)-1:0]  cfg_rline,
  input  cfg_line_t                     cfg_rdata,
  // columns
  output logic [N_COL-1:0]              pm_we,
  output logic [$clog2(PM_WORDS)-1:0]   pm_waddr,
  output cfg_line_t                     pm_wline,
  output logic [N_COL-1:0]              col_start,
  input  logic [N_COL-1:0]              col_busy,
  input  logic [N_COL-1:0]              col_done,
  // DMA
  output logic                          dma_start,
  output logic                          dma_dir,
  output logic [31:0]                   dma_sys,
  output logic [SPM_AW-1:0]             dma_spm,
  output logic [15:0]                   dma_len,
  input  logic                          dma_busy,
  input  logic                          dma_done,
  input  logic                          dma_err
);

  localparam int unsigned CLW = $clog2(CFG_LINES);
  localparam int unsigned PW  = $clog2(PM_WORDS);

  // ---------------------------------------------------------- AHB slave
  logic        dp_valid, dp_write;
  logic [15:0] dp_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dp_valid <= 1'b0;
      dp_write <= 1'b0;
      dp_addr  <= '0;
    end else if (hready) begin
      dp_valid <= hsel && htrans[1];
      dp_write <= hwrite;
      dp_addr  <= haddr[15:0];
    end
  end

  logic wr_reg, wr_cfg;
  assign wr_reg = dp_valid && dp_write && !dp_addr[15];
  assign wr_cfg = dp_valid && dp_write &&  dp_addr[15];

  assign cfg_we    = wr_cfg;
  assign cfg_wline = dp_addr[5 +: CLW];
  assign cfg_wword = dp_addr[2 +: $clog2(CFG_WORDS)];
  assign cfg_wdata = hwdata;

  // ---------------------------------------------------------- registers
  logic [7:4]  flags, irq_en;
  logic [N_COL-1:0] pending;
  logic [N_COL-1:0] grp [N_COL];

  // loader
  typedef enum logic [1:0] {L_IDLE, L_LOAD, L_GO} lstate_e;
  lstate_e          lstate;
  logic [N_COL-1:0] l_mask;
  logic             l_col;
  logic [PW-1:0]    l_i, l_n1;
  logic [CLW-1:0]   l_line;

  logic [N_COL-1:0] req_mask;
  logic [6:0]       req_n;
  logic             launch, reject, kdone_set;
  logic [N_COL-1:0] pend_after;

  always_comb begin
    req_mask = hwdata[N_COL-1:0];
    req_n    = hwdata[22:16];
    launch   = 1'b0;
    reject   = 1'b0;
    if (wr_reg && dp_addr[7:0] == 8'h00) begin
      if (lstate == L_IDLE && (pending & req_mask) == '0 && req_mask != '0
          && req_n != 0 && 32'(req_n) <= PM_WORDS)
        launch = 1'b1;
      else
        reject = 1'b1;
    end
    pend_after = pending & ~col_done;
    kdone_set  = 1'b0;
    for (int c = 0; c < N_COL; c++)
      if (col_done[c] && (pend_after & grp[c]) == '0) kdone_set = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flags     <= '0;
      irq_en    <= '0;
      dma_sys   <= '0;
      dma_spm   <= '0;
      dma_len   <= '0;
      dma_dir   <= 1'b0;
      dma_start <= 1'b0;
      pending   <= '0;
      for (int c = 0; c < N_COL; c++) grp[c] <= '0;
      lstate    <= L_IDLE;
      l_mask    <= '0;
      l_col     <= 1'b0;
      l_i       <= '0;
      l_n1      <= '0;
      l_line    <= '0;
      col_start <= '0;
    end else begin
      dma_start <= 1'b0;
      col_start <= '0;
      // completion and error flags
      pending <= pend_after;
      if (kdone_set) flags[4] <= 1'b1;
      if (dma_done)  flags[5] <= 1'b1;
      flags[6] <= dma_err;
      if (reject)    flags[7] <= 1'b1;

      if (wr_reg) begin
        unique case (dp_addr[7:0])
          8'h08: begin
            if (hwdata[4]) flags[4] <= 1'b0;
            if (hwdata[5]) flags[5] <= 1'b0;
            if (hwdata[7]) flags[7] <= 1'b0;
          end
          8'h0C: irq_en  <= hwdata[7:4];
          8'h10: dma_sys <= hwdata;
          8'h14: dma_spm <= hwdata[SPM_AW-1:0];
          8'h18: dma_len <= hwdata[15:0];
          8'h1C: begin
            dma_dir   <= hwdata[1];
            dma_start <= hwdata[0] && !dma_busy;
          end
          default: ;
        endcase
      end

      // loader
      unique case (lstate)
        L_IDLE: if (launch) begin
          l_mask  <= req_mask;
          l_col   <= !req_mask[0];
          l_i     <= '0;
          l_n1    <= PW'(req_n - 1);
          l_line  <= hwdata[8 +: CLW];
          lstate  <= L_LOAD;
          pending <= pend_after | req_mask;
          for (int c = 0; c < N_COL; c++) if (req_mask[c]) grp[c] <= req_mask;
        end
        L_LOAD: begin
          l_line <= l_line + 1'b1;
          l_i    <= l_i + 1'b1;
          if (l_i == l_n1) begin
            l_i <= '0;
            if (!l_col && l_mask[1]) l_col <= 1'b1;
            else                     lstate <= L_GO;
          end
        end
        L_GO: begin
          col_start <= l_mask;
          lstate    <= L_IDLE;
        end
        default: lstate <= L_IDLE;
      endcase
    end
  end

  always_comb begin
    cfg_rline = l_line;
    pm_waddr  = l_i;
    pm_wline  = cfg_rdata;
    pm_we     = '0;
    if (lstate == L_LOAD) pm_we[l_col] = 1'b1;
  end

  // ---------------------------------------------------------- read data
  always_comb begin
    hrdata = '0;
    if (dp_valid && !dp_write && !dp_addr[15]) begin
      unique case (dp_addr[7:0])
        8'h04: hrdata = {24'd0, flags, dma_busy, (lstate != L_IDLE) || (col_start != '0), col_busy};
        8'h0C: hrdata = {24'd0, irq_en, 4'd0};
        8'h10: hrdata = dma_sys;
        8'h14: hrdata = 32'(dma_spm);
        8'h18: hrdata = {16'd0, dma_len};
        default: hrdata = '0;
      endcase
    end
  end

  assign hreadyout = 1'b1;
  assign hresp     = 1'b0;
  assign irq       = |(flags & irq_en);

endmodule
