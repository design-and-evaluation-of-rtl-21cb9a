// imax_top: the IMAX accelerator as built here. It holds NLANES lanes,
// each made of one imax_lane (64 PE/LMM units and a lane controller) and
// one dma_channel. Lanes share nothing: every lane has its own descriptor
// port from the host and its own memory read and write ports toward the
// system memory, as in the paper, where each lane owns one DMA channel so
// that lanes run different rows of a matrix-vector product in parallel.
// The memory ports are a simple word request/response interface standing
// in for the AXI ports of the platform; the host processor, the DRAM and
// the network-on-chip are outside this design.
// Interface (all arrays indexed by lane):
//   desc_valid/desc_ready/desc  host descriptors (load, drain, command)
//   idle                        channel has no descriptor in progress
//   busy/exec_done              lane executing / one-cycle end of EXEC
//   rd_req_*/rd_rsp_*           memory reads, responses in order
//   wr_*                        memory writes
//   cnt_conf/load/drain/exec    per-lane phase counters (commands / cycles)
// Timing: one clock; the paper's FPGA build ran at 140 MHz and its ASIC
// projection at 840 MHz. NLANES defaults to the two lanes the paper
// evaluates (its FPGA build has eight); NPE = 64 and a 32 KB LMM (4096
// 64-bit words per bank) follow the paper.
// Standing lint warning: rst_n is also used, synchronously, to gate the
// assertions in the modules below; the logic itself resets asynchronously.
module imax_top
  import imax_pkg::*;
#(
  parameter int unsigned NLANES    = 2,
  parameter int unsigned NPE       = 64,
  parameter int unsigned LMM_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        desc_valid   [NLANES],
  output logic        desc_ready   [NLANES],
  input  dma_desc_t   desc         [NLANES],
  output logic        idle         [NLANES],
  output logic        busy         [NLANES],
  output logic        exec_done    [NLANES],
  output logic        rd_req_valid [NLANES],
  input  logic        rd_req_ready [NLANES],
  output logic [31:0] rd_req_addr  [NLANES],
  input  logic        rd_rsp_valid [NLANES],
  input  word_t       rd_rsp_data  [NLANES],
  output logic        wr_valid     [NLANES],
  input  logic        wr_ready     [NLANES],
  output logic [31:0] wr_addr      [NLANES],
  output word_t       wr_data      [NLANES],
  output logic [31:0] cnt_conf     [NLANES],
  output logic [31:0] cnt_load     [NLANES],
  output logic [31:0] cnt_drain    [NLANES],
  output logic [31:0] cnt_exec     [NLANES]
);

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    logic      cmd_valid, cmd_ready, rsp_valid;
    lane_cmd_t cmd;
    word_t     rsp_data;

    dma_channel u_dma (
      .clk, .rst_n,
      .desc_valid     (desc_valid[l]),
      .desc_ready     (desc_ready[l]),
      .desc           (desc[l]),
      .idle           (idle[l]),
      .rd_req_valid   (rd_req_valid[l]),
      .rd_req_ready   (rd_req_ready[l]),
      .rd_req_addr    (rd_req_addr[l]),
      .rd_rsp_valid   (rd_rsp_valid[l]),
      .rd_rsp_data    (rd_rsp_data[l]),
      .wr_valid       (wr_valid[l]),
      .wr_ready       (wr_ready[l]),
      .wr_addr        (wr_addr[l]),
      .wr_data        (wr_data[l]),
      .lane_cmd_valid (cmd_valid),
      .lane_cmd_ready (cmd_ready),
      .lane_cmd       (cmd),
      .lane_rsp_valid (rsp_valid),
      .lane_rsp_data  (rsp_data)
    );

    imax_lane #(.NPE(NPE), .LMM_DEPTH(LMM_DEPTH)) u_lane (
      .clk, .rst_n,
      .cmd_valid, .cmd_ready, .cmd,
      .rsp_valid, .rsp_data,
      .busy      (busy[l]),
      .exec_done (exec_done[l]),
      .cnt_conf  (cnt_conf[l]),
      .cnt_load  (cnt_load[l]),
      .cnt_drain (cnt_drain[l]),
      .cnt_exec  (cnt_exec[l])
    );
  end

endmodule
