// srf: scalar register file of one column, with its single-port arbiter.
//
// Eight 32-bit entries (paper) for kernel scalars: SPM addresses, index
// masks, loop bounds. The paper makes the SRF single-ported, one access at a
// time from the RCs, LSU, MXCU and LCU. This module takes one request vector
// from all units of the column and performs that one access: the index of
// the lowest-numbered requester is used, the read data is broadcast (so
// several units may consume one read of the same entry, this design's
// choice), and at most one unit may write. A write lands at the rising edge;
// a read in the same cycle returns the old value. Two requesters with
// different indices, or two writers, are a programming error flagged by
// assertions (the schedule is fixed at mapping time, so there is no stall).
// Entries reset to zero.
module srf
  import vwr2a_pkg::*;
#(
  parameter int unsigned N_REQ = 3 + N_RC
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic     [N_REQ-1:0]   rd,
  input  logic     [N_REQ-1:0]   wr,
  input  srf_idx_t [N_REQ-1:0]   idx,
  input  word_t    [N_REQ-1:0]   wdata,
  output word_t                  rdata
);

  word_t    regs [SRF_N];
  srf_idx_t port_idx;
  logic     port_we;
  word_t    port_wdata;
  logic     idx_clash;

  always_comb begin
    port_idx   = '0;
    port_we    = 1'b0;
    port_wdata = '0;
    idx_clash  = 1'b0;
    for (int i = N_REQ - 1; i >= 0; i--)
      if (rd[i] || wr[i]) port_idx = idx[i];
    for (int i = 0; i < N_REQ; i++) begin
      if (wr[i]) begin
        port_we    = 1'b1;
        port_wdata = wdata[i];
      end
      if ((rd[i] || wr[i]) && idx[i] != port_idx) idx_clash = 1'b1;
    end
  end

  assign rdata = regs[port_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SRF_N; i++) regs[i] <= '0;
    end else if (en && port_we) begin
      regs[port_idx] <= port_wdata;
    end
  end

  a_one_index: assert property (@(posedge clk) disable iff (!rst_n) en |-> !idx_clash)
    else $error("srf: two units address different entries in one cycle");
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) en |-> $onehot0(wr))
    else $error("srf: two writers in one cycle");

endmodule
