// lane_ctrl: the controller of one compute lane. It accepts lane commands
// (from the lane's DMA channel) and
//  * CONF:  stores a PE's static configuration word,
//  * REGV:  stores an initial register value that is fed into the first
//           PE's register file with every token,
//  * RANGE: stores the loop: iterations per thread (niter), the index step
//           per iteration (istride) and per thread (tstride),
//  * LMMW/LMMR: writes/reads one word of a PE's LMM in the bank owned by
//           the DMA side (these are accepted while EXEC runs, which is how
//           loading the next block overlaps computation),
//  * SWAP:  exchanges the PE and DMA banks of all LMMs,
//  * EXEC:  issues niter x 4 tokens into the first PE, one per cycle, the
//           four threads (columns) in rotation, then waits until the last
//           token has left the 64-stage chain and reports done.
// With every token it writes the thread number (B13), the thread's row index
// t*tstride + it*istride (B14) and the iteration index it*istride (B15) into
// the register file, from which the address generators form LMM addresses.
// It also counts cycles by phase (configuration, LMM load, LMM drain,
// execution), the breakdown the paper reports for the kernels. The paper
// names these phases and the four-way column multithreading; the command
// set, the index registers and the handshake are this design's choices.
// Handshake: a command is taken in a cycle with cmd_valid && cmd_ready;
// LMMR data comes back on rsp_valid/rsp_data the next cycle.
// Standing lint warning: rst_n is also used, synchronously, to gate the
// assertions; the logic itself resets asynchronously.
module lane_ctrl
  import imax_pkg::*;
#(
  parameter int unsigned NPE = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  lane_cmd_t           cmd,
  output logic                rsp_valid,
  output word_t               rsp_data,
  output logic                busy,
  output logic                exec_done,     // one-cycle pulse
  // to the PE chain
  output pe_cfg_t             cfg [NPE],
  output tok_t                tok0,
  output regs_t               regs0,
  output logic                swap,
  output logic [NPE-1:0]      d_re,
  output logic [NPE-1:0]      d_we,
  output logic [AW-1:0]       d_addr,
  output word_t               d_wdata,
  input  word_t               d_rdata [NPE],
  // phase cycle counters
  output logic [31:0]         cnt_conf,
  output logic [31:0]         cnt_load,
  output logic [31:0]         cnt_drain,
  output logic [31:0]         cnt_exec
);
  localparam int unsigned FLUSH = NPE * PE_LAT + 2;
  localparam int unsigned PIW   = (NPE > 1) ? $clog2(NPE) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;
  state_e state;

  regs_t regv;
  logic [31:0] niter;
  logic [15:0] istride, tstride;
  logic [31:0] it;
  logic [1:0]  thr;
  logic [15:0] iidx;
  logic [31:0] fcnt;

  logic take, is_mem, is_ctl;
  assign is_mem = (cmd.op == C_LMMW) || (cmd.op == C_LMMR);
  assign is_ctl = !is_mem;
  assign cmd_ready = is_mem || (state == S_IDLE);
  assign take = cmd_valid && cmd_ready;
  assign busy = (state != S_IDLE);

  // DMA-side LMM access, decoded combinationally
  always_comb begin
    d_re = '0;
    d_we = '0;
    if (take && cmd.op == C_LMMW && 32'(cmd.pe) < NPE) d_we[cmd.pe[PIW-1:0]] = 1'b1;
    if (take && cmd.op == C_LMMR && 32'(cmd.pe) < NPE) d_re[cmd.pe[PIW-1:0]] = 1'b1;
  end
  assign d_addr  = cmd.addr;
  assign d_wdata = cmd.data;
  assign swap    = take && (cmd.op == C_SWAP);

  logic [PIW-1:0] rd_pe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rd_pe     <= '0;
    end else begin
      rsp_valid <= take && (cmd.op == C_LMMR);
      if (take && cmd.op == C_LMMR) rd_pe <= cmd.pe[PIW-1:0];
    end
  end
  assign rsp_data = d_rdata[rd_pe];

  // configuration storage, one register per PE
  for (genvar i = 0; i < NPE; i++) begin : g_cfg
    logic [$bits(pe_cfg_t)-1:0] q;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) q <= '0;
      else if (take && cmd.op == C_CONF && 32'(cmd.pe) == i) q <= cmd.cfg;
    assign cfg[i] = pe_cfg_t'(q);
  end

  for (genvar r = 0; r < NGRP * NREG; r++) begin : g_regv
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) regv[r] <= '0;
      else if (take && cmd.op == C_REGV && cmd.addr[4:0] == 5'(r)) regv[r] <= cmd.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      niter   <= '0;
      istride <= '0;
      tstride <= '0;
    end else if (take) begin
      unique case (cmd.op)
        C_RANGE: begin
          niter   <= cmd.data[31:0];
          istride <= cmd.data[47:32];
          tstride <= cmd.data[63:48];
        end
        default: ;
      endcase
    end
  end

  // token issue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      it        <= '0;
      thr       <= '0;
      iidx      <= '0;
      fcnt      <= '0;
      exec_done <= 1'b0;
    end else begin
      exec_done <= 1'b0;
      unique case (state)
        S_IDLE:
          if (take && cmd.op == C_EXEC) begin
            it <= '0; thr <= '0; iidx <= '0; fcnt <= '0;
            state <= (niter == 0) ? S_FLUSH : S_RUN;
          end
        S_RUN: begin
          thr <= thr + 2'd1;
          if (thr == 2'(NTHR - 1)) begin
            iidx <= iidx + istride;
            it   <= it + 32'd1;
            if (it == niter - 32'd1) state <= S_FLUSH;
          end
        end
        S_FLUSH: begin
          fcnt <= fcnt + 32'd1;
          if (fcnt == 32'(FLUSH - 1)) begin
            state     <= S_IDLE;
            exec_done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    tok0 = '0;
    regs0 = regv;
    if (state == S_RUN) begin
      tok0.valid  = 1'b1;
      tok0.thread = thr;
      tok0.first  = (it == 32'd0);
      tok0.last   = (it == niter - 32'd1);
      regs0[R_THREAD] = {62'd0, thr};
      regs0[R_TIDX]   = {48'd0, 16'({14'd0, thr} * tstride) + iidx};
      regs0[R_IIDX]   = {48'd0, iidx};
    end
  end

  // phase counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_conf <= '0; cnt_load <= '0; cnt_drain <= '0; cnt_exec <= '0;
    end else begin
      if (take && (cmd.op == C_CONF || cmd.op == C_REGV || cmd.op == C_RANGE))
        cnt_conf <= cnt_conf + 32'd1;
      if (take && cmd.op == C_LMMW) cnt_load <= cnt_load + 32'd1;
      if (take && cmd.op == C_LMMR) cnt_drain <= cnt_drain + 32'd1;
      if (state != S_IDLE) cnt_exec <= cnt_exec + 32'd1;
    end
  end

  // a command other than an LMM access is never taken during EXEC
  always_ff @(posedge clk)
    if (rst_n) assert (!(take && is_ctl && busy)) else $error("lane_ctrl: command during EXEC");

endmodule
