// vwr2a_column: one column of the reconfigurable array.
//
// A column (paper, Fig. 1) is four RCs, three VWRs (A, B, C), a shuffle
// unit, an 8-entry SRF and the three specialised slots LCU, LSU and MXCU,
// all driven by one shared program counter. Each unit has its own program
// memory; together, the words at one PC form a wide pre-decoded instruction,
// much like a VLIW bundle.
//
// Operation: the synchronizer writes the programs through pm_we/pm_waddr/
// pm_wline (one configuration line, i.e. one PC slot of all seven units, per
// cycle) and then pulses start. The column then runs from PC 0: every cycle
// in which it is not stalled the LCU supplies the next PC, and all units
// execute the instruction at the current PC in lock-step. When the LCU
// executes EXIT the column stops and pulses done for one cycle.
//
// Stall: the only stall source is the SPM wide port, which both columns
// share. While the LSU requests it and spm_gnt is low, nothing in the column
// changes state (en low). This arbitration is this design's choice; the
// paper only says that the SPM is shared by all columns.
//
// Neighbour wiring (Fig. 1): RC i reads the previous result of RC i-1 (up)
// and RC i+1 (down) of its own column and of RC i of the other column
// (side_in). The end rows have no wrap-around: their missing neighbour
// reads as zero.
module vwr2a_column
  import vwr2a_pkg::*;
#(
  parameter int unsigned PM_WORDS = PM_DEPTH
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // program load and control from the synchronizer
  input  logic                        pm_we,
  input  logic [$clog2(PM_WORDS)-1:0] pm_waddr,
  input  cfg_line_t                   pm_wline,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic                        stalled,   // busy but held this cycle
  // horizontal RC links to the other column
  input  word_t [N_RC-1:0]            side_in,
  output word_t [N_RC-1:0]            side_out,
  // SPM wide port
  output logic                        spm_req,
  output logic                        spm_we,
  output logic [SPM_WORD_AW-1:0]      spm_addr,
  output logic [VWR_WORDS-1:0]        spm_wmask,
  output vwr_t                        spm_wdata,
  input  vwr_t                        spm_rdata,
  input  logic                        spm_gnt
);

  localparam int unsigned PW    = $clog2(PM_WORDS);
  localparam int unsigned N_REQ = 3 + N_RC;   // LCU, LSU, MXCU, RC0..RC3

  logic          run;
  logic [PW-1:0] pc, next_pc;
  logic          en, lcu_branch, lcu_exit;
  kidx_t         k;

  // SRF request bundle: index 0 LCU, 1 LSU, 2 MXCU, 3.. RCs
  logic     [N_REQ-1:0] srf_rd, srf_wr;
  srf_idx_t [N_REQ-1:0] srf_idx;
  word_t    [N_REQ-1:0] srf_wd;
  word_t                srf_rdata;

  vwr_t  [N_VWR-1:0]          vwr_q;
  logic  [N_VWR-1:0]          lsu_vwr_we;
  vwr_t                       lsu_vwr_wdata;
  vwr_t                       shuf_y;
  shuf_mode_e                 shuf_mode;
  word_t [N_VWR-1:0][N_RC-1:0] slice_rdata;   // [vwr][rc]
  logic  [N_VWR-1:0][N_RC-1:0] slice_we;
  word_t [N_VWR-1:0][N_RC-1:0] slice_wdata;
  word_t [N_RC-1:0]           rc_res;

  assign en      = run && (!spm_req || spm_gnt);
  assign busy    = run;
  assign stalled = run && !en;

  // ------------------------------------------------------------ PC / state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      pc  <= '0;
    end else if (start) begin
      run <= 1'b1;
      pc  <= '0;
    end else if (en) begin
      pc <= next_pc;
      if (lcu_exit) run <= 1'b0;
    end
  end

  assign done = en && lcu_exit;

  // --------------------------------------------------------------- slots
  lcu #(.PM_WORDS(PM_WORDS)) u_lcu (
    .clk(clk), .rst_n(rst_n), .en(en), .start(start), .pc(pc),
    .pm_we(pm_we), .pm_waddr(pm_waddr),
    .pm_wdata(lcu_instr_t'(pm_wline[CFG_LCU][$bits(lcu_instr_t)-1:0])),
    .srf_rd(srf_rd[0]), .srf_idx(srf_idx[0]), .srf_rdata(srf_rdata),
    .next_pc(next_pc), .branch(lcu_branch), .exit_k(lcu_exit)
  );
  assign srf_wr[0] = 1'b0;
  assign srf_wd[0] = '0;

  lsu #(.PM_WORDS(PM_WORDS)) u_lsu (
    .clk(clk), .rst_n(rst_n), .en(en), .start(start), .pc(pc),
    .pm_we(pm_we), .pm_waddr(pm_waddr),
    .pm_wdata(lsu_instr_t'(pm_wline[CFG_LSU][$bits(lsu_instr_t)-1:0])),
    .srf_rd(srf_rd[1]), .srf_wr(srf_wr[1]), .srf_idx(srf_idx[1]),
    .srf_wdata(srf_wd[1]), .srf_rdata(srf_rdata),
    .vwr_q(vwr_q), .shuf_y(shuf_y), .shuf_mode(shuf_mode),
    .vwr_we(lsu_vwr_we), .vwr_wdata(lsu_vwr_wdata),
    .spm_req(spm_req), .spm_we(spm_we), .spm_addr(spm_addr),
    .spm_wmask(spm_wmask), .spm_wdata(spm_wdata), .spm_rdata(spm_rdata)
  );

  mxcu #(.PM_WORDS(PM_WORDS)) u_mxcu (
    .clk(clk), .rst_n(rst_n), .en(en), .start(start), .pc(pc),
    .pm_we(pm_we), .pm_waddr(pm_waddr),
    .pm_wdata(mxcu_instr_t'(pm_wline[CFG_MXCU][$bits(mxcu_instr_t)-1:0])),
    .srf_rd(srf_rd[2]), .srf_idx(srf_idx[2]), .srf_rdata(srf_rdata), .k(k)
  );
  assign srf_wr[2] = 1'b0;
  assign srf_wd[2] = '0;

  srf #(.N_REQ(N_REQ)) u_srf (
    .clk(clk), .rst_n(rst_n), .en(en),
    .rd(srf_rd), .wr(srf_wr), .idx(srf_idx), .wdata(srf_wd), .rdata(srf_rdata)
  );

  shuffle_unit u_shuf (.a(vwr_q[VS_A]), .b(vwr_q[VS_B]), .mode(shuf_mode), .y(shuf_y));

  // ---------------------------------------------------------------- VWRs
  for (genvar v = 0; v < N_VWR; v++) begin : g_vwr
    vwr u_vwr (
      .clk(clk), .rst_n(rst_n),
      .wide_we(lsu_vwr_we[v]), .wide_wdata(lsu_vwr_wdata), .q(vwr_q[v]),
      .k(k), .slice_we(slice_we[v]), .slice_wdata(slice_wdata[v]),
      .slice_rdata(slice_rdata[v])
    );
  end

  // ----------------------------------------------------------------- RCs
  for (genvar r = 0; r < N_RC; r++) begin : g_rc
    word_t [N_VWR-1:0] rd_words;
    logic  [N_VWR-1:0] we_words;
    word_t             wd_word;
    word_t             up, down;

    for (genvar v = 0; v < N_VWR; v++) begin : g_v
      assign rd_words[v]       = slice_rdata[v][r];
      assign slice_we[v][r]    = we_words[v];
      assign slice_wdata[v][r] = wd_word;
    end
    if (r == 0)        begin : g_top assign up   = '0;            end
    else               begin : g_up  assign up   = rc_res[r-1];   end
    if (r == N_RC - 1) begin : g_bot assign down = '0;            end
    else               begin : g_dn  assign down = rc_res[r+1];   end

    rc #(.PM_WORDS(PM_WORDS)) u_rc (
      .clk(clk), .rst_n(rst_n), .en(en), .pc(pc),
      .pm_we(pm_we), .pm_waddr(pm_waddr),
      .pm_wdata(rc_instr_t'(pm_wline[CFG_RC0 + r][$bits(rc_instr_t)-1:0])),
      .vwr_rdata(rd_words), .srf_rdata(srf_rdata),
      .up_in(up), .down_in(down), .side_in(side_in[r]),
      .res(rc_res[r]), .vwr_we(we_words), .vwr_wdata(wd_word),
      .srf_rd(srf_rd[3+r]), .srf_wr(srf_wr[3+r]), .srf_idx(srf_idx[3+r]),
      .srf_wdata(srf_wd[3+r])
    );
  end

  assign side_out = rc_res;

endmodule
