// dma_channel: the DMA channel of one lane. The paper's DMA controller has
// one independent channel per lane, so lanes never contend for a channel;
// this module is one such channel. The host hands it descriptors:
//  * D_LOAD reads nwords consecutive words of the DMA buffer and writes
//    them into consecutive words of one PE's LMM (the bank not owned by the
//    PE, so a load may run while the lane executes). Read requests are
//    issued back to back; responses may come after any delay, in order;
//  * D_DRAIN reads nwords words of one PE's LMM (DMA bank) and writes them
//    to the DMA buffer, one word in flight at a time;
//  * D_CMD passes one lane command (configuration, register values, loop
//    range, bank swap, start) to the lane, waiting while the lane is busy.
// Descriptors are processed in order, one at a time; idle is high when none
// is in progress. The memory side is a simple request/response word
// interface standing in for the AXI read and write ports of the platform
// (its NoC and DRAM are outside this design). The per-lane channel follows
// the paper; the descriptor format and the memory interface are this
// design's choices.
// Standing lint warnings: the stored descriptor's kind field is unused (the
// kind is acted on when the descriptor is taken), and rst_n also gates the
// assertions, which lint reports as a reset used both ways.
module dma_channel
  import imax_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host
  input  logic        desc_valid,
  output logic        desc_ready,
  input  dma_desc_t   desc,
  output logic        idle,
  // memory read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output logic [31:0] rd_req_addr,
  input  logic        rd_rsp_valid,
  input  word_t       rd_rsp_data,
  // memory write port
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output word_t       wr_data,
  // lane
  output logic        lane_cmd_valid,
  input  logic        lane_cmd_ready,
  output lane_cmd_t   lane_cmd,
  input  logic        lane_rsp_valid,
  input  word_t       lane_rsp_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_DR_RD, S_DR_WAIT, S_DR_WR, S_CMD} state_e;
  state_e state;

  dma_desc_t   cur;
  logic [15:0] req_cnt;   // read requests issued / LMM reads issued
  logic [15:0] rsp_cnt;   // responses written / words drained
  word_t       hold;

  assign desc_ready = (state == S_IDLE);
  assign idle       = (state == S_IDLE);

  assign rd_req_valid = (state == S_LOAD) && (req_cnt != cur.nwords);
  assign rd_req_addr  = cur.ddr_addr + 32'(req_cnt);

  assign wr_valid = (state == S_DR_WR);
  assign wr_addr  = cur.ddr_addr + 32'(rsp_cnt);
  assign wr_data  = hold;

  always_comb begin
    lane_cmd_valid = 1'b0;
    lane_cmd       = cur.cmd;
    unique case (state)
      S_LOAD: begin
        // every read response becomes one LMM write; the lane always takes them
        lane_cmd_valid = rd_rsp_valid;
        lane_cmd.op    = C_LMMW;
        lane_cmd.pe    = cur.pe;
        lane_cmd.addr  = cur.lmm_addr + AW'(rsp_cnt);
        lane_cmd.data  = rd_rsp_data;
      end
      S_DR_RD: begin
        lane_cmd_valid = 1'b1;
        lane_cmd.op    = C_LMMR;
        lane_cmd.pe    = cur.pe;
        lane_cmd.addr  = cur.lmm_addr + AW'(rsp_cnt);
      end
      S_CMD: lane_cmd_valid = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur     <= '0;
      req_cnt <= '0;
      rsp_cnt <= '0;
      hold    <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (desc_valid) begin
            cur     <= desc;
            req_cnt <= '0;
            rsp_cnt <= '0;
            unique case (desc.kind)
              D_LOAD:  state <= (desc.nwords == 0) ? S_IDLE : S_LOAD;
              D_DRAIN: state <= (desc.nwords == 0) ? S_IDLE : S_DR_RD;
              default: state <= S_CMD;
            endcase
          end
        S_LOAD: begin
          if (rd_req_valid && rd_req_ready) req_cnt <= req_cnt + 16'd1;
          if (rd_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 16'd1;
            if (rsp_cnt + 16'd1 == cur.nwords) state <= S_IDLE;
          end
        end
        S_DR_RD:
          if (lane_cmd_ready) state <= S_DR_WAIT;
        S_DR_WAIT:
          if (lane_rsp_valid) begin
            hold  <= lane_rsp_data;
            state <= S_DR_WR;
          end
        S_DR_WR:
          if (wr_ready) begin
            rsp_cnt <= rsp_cnt + 16'd1;
            state   <= (rsp_cnt + 16'd1 == cur.nwords) ? S_IDLE : S_DR_RD;
          end
        S_CMD:
          if (lane_cmd_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // LMM writes of a load are never refused, and no response comes unasked
  always_ff @(posedge clk)
    if (rst_n) begin
      assert (!(state == S_LOAD && rd_rsp_valid) || lane_cmd_ready)
        else $error("dma_channel: lane refused an LMM write");
      assert (!(state == S_LOAD && rd_rsp_valid) || rsp_cnt < req_cnt)
        else $error("dma_channel: read response without request");
    end

endmodule
