// imax_lane: one IMAX compute lane, NPE (64) PE/LMM units in a strict
// one-dimensional chain with their controller. The execution data path runs
// from each PE only to its downstream neighbour: PE i's outgoing token and
// register file are PE i+1's incoming ones, so a loop body mapped onto k
// consecutive PEs forms a feed-forward pipeline that accepts one token per
// cycle and whose results leave PE k after k*PE_LAT cycles. The memory data
// path connects each PE only to its own LMM. The lane controller feeds the
// first PE, holds the per-PE configuration and gives the DMA side access to
// the free bank of every LMM. Units not used by a kernel are configured as
// PASS and only forward the register file. The chain, the 64 PEs and the
// alternating PE/LMM arrangement follow the paper; the tail of the chain is
// not connected to anything, since results are stored into LMMs and drained.
// Interface: lane commands (valid/ready), LMM read responses, status and
// phase cycle counters (see lane_ctrl).
// Standing lint warning: rst_n is also used, synchronously, to gate the
// assertions; the logic itself resets asynchronously.
module imax_lane
  import imax_pkg::*;
#(
  parameter int unsigned NPE       = 64,
  parameter int unsigned LMM_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  lane_cmd_t   cmd,
  output logic        rsp_valid,
  output word_t       rsp_data,
  output logic        busy,
  output logic        exec_done,
  output logic [31:0] cnt_conf,
  output logic [31:0] cnt_load,
  output logic [31:0] cnt_drain,
  output logic [31:0] cnt_exec
);
  pe_cfg_t        cfg [NPE];
  tok_t           tok  [NPE+1];
  regs_t          regs [NPE+1];
  logic           swap;
  logic [NPE-1:0] d_re, d_we, pe_bank;
  logic [AW-1:0]  d_addr;
  word_t          d_wdata;
  word_t          d_rdata [NPE];

  lane_ctrl #(.NPE(NPE)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .rsp_valid, .rsp_data,
    .busy, .exec_done,
    .cfg,
    .tok0 (tok[0]), .regs0 (regs[0]),
    .swap, .d_re, .d_we, .d_addr, .d_wdata, .d_rdata,
    .cnt_conf, .cnt_load, .cnt_drain, .cnt_exec
  );

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    imax_pe #(.LMM_DEPTH(LMM_DEPTH)) u_pe (
      .clk, .rst_n,
      .cfg      (cfg[i]),
      .in_tok   (tok[i]),
      .in_regs  (regs[i]),
      .out_tok  (tok[i+1]),
      .out_regs (regs[i+1]),
      .swap,
      .pe_bank  (pe_bank[i]),
      .d_re     (d_re[i]),
      .d_we     (d_we[i]),
      .d_addr,
      .d_wdata,
      .d_rdata  (d_rdata[i])
    );
  end

  // all LMMs swap together, so their bank selects never differ
  always_ff @(posedge clk)
    if (rst_n) assert (pe_bank == '0 || pe_bank == '1) else $error("imax_lane: LMM banks out of step");

endmodule
