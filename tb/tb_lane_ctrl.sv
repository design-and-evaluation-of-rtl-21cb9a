// tb_lane_ctrl: checks the lane controller on its own with a small chain
// length: CONF and REGV storage, the EXEC token sequence (threads in
// rotation, first/last flags, index registers B13..B15 computed from RANGE),
// the EXEC duration (niter*4 issue cycles plus the chain flush), that LMM
// writes and reads are accepted during EXEC while other commands wait, the
// one-cycle LMMR response, the swap pulse and the phase counters.
module tb_lane_ctrl;
  import imax_pkg::*;
  localparam int NPE = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rsp_valid, busy, exec_done, swap;
  lane_cmd_t cmd;
  word_t rsp_data, d_wdata;
  pe_cfg_t cfg [NPE];
  tok_t tok0;
  regs_t regs0;
  logic [NPE-1:0] d_re, d_we;
  logic [AW-1:0] d_addr;
  word_t d_rdata [NPE];
  logic [31:0] cnt_conf, cnt_load, cnt_drain, cnt_exec;
  int checks = 0, failures = 0, cyc = 0;

  lane_ctrl #(.NPE(NPE)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  for (genvar i = 0; i < NPE; i++) assign d_rdata[i] = {32'(i), 16'hBEEF, d_addr};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input cmd_op_e op, input int pe, input int addr, input word_t data,
                      input pe_cfg_t c);
    cmd_valid = 1; cmd.op = op; cmd.pe = PEW'(pe); cmd.addr = AW'(addr); cmd.data = data;
    cmd.cfg = c;
    #1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    cmd_valid = 0;
  endtask

  localparam int NIT = 5, IST = 3, TST = 100;
  int tok_seen = 0, t_start, t_done;
  int lmm_during_exec = 0, ctl_wait = 0;

  // token monitor
  always @(negedge clk) begin
    if (rst_n && tok0.valid) begin
      int it, t;
      it = tok_seen / 4; t = tok_seen % 4;
      chk(tok0.thread == 2'(t), "thread order");
      chk(tok0.first == (it == 0) && tok0.last == (it == NIT - 1), "first/last");
      chk(regs0[R_THREAD] == 64'(t) && regs0[R_IIDX] == 64'(it * IST)
          && regs0[R_TIDX] == 64'(t * TST + it * IST), "index registers");
      chk(regs0[3] == 64'h1234, "REGV value in register A3");
      tok_seen++;
    end
    if (rst_n && busy && cmd_valid && (cmd.op == C_LMMW) && cmd_ready) lmm_during_exec++;
    if (rst_n && busy && cmd_valid && (cmd.op == C_SWAP)) begin
      ctl_wait++;
      chk(!cmd_ready, "SWAP refused during EXEC");
    end
  end

  initial begin
    pe_cfg_t c;
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < NPE; p++) begin
      c = '0; c.a1_op = alu1_op_e'(p + 1); c.dst = 5'(p + 7);
      send(C_CONF, p, 0, 0, c);
    end
    for (int p = 0; p < NPE; p++) chk(cfg[p].a1_op == alu1_op_e'(p + 1) && cfg[p].dst == 5'(p + 7), "CONF");
    send(C_REGV, 0, 3, 64'h1234, '0);
    send(C_RANGE, 0, 0, {16'(TST), 16'(IST), 32'(NIT)}, '0);
    // LMM write decode
    cmd_valid = 1; cmd.op = C_LMMW; cmd.pe = 2; cmd.addr = 9; cmd.data = 64'h55; #1;
    chk(d_we == 4'b0100 && d_addr == 9 && d_wdata == 64'h55 && d_re == 0, "LMMW decode");
    @(posedge clk); #1; cmd_valid = 0;
    // LMM read and response
    cmd_valid = 1; cmd.op = C_LMMR; cmd.pe = 1; cmd.addr = 17; #1;
    chk(d_re == 4'b0010, "LMMR decode");
    @(posedge clk); #1; cmd_valid = 0;
    chk(rsp_valid && rsp_data[63:32] == 1, "LMMR response from PE 1");
    @(posedge clk); #1;
    chk(!rsp_valid, "response lasts one cycle");
    // EXEC
    send(C_EXEC, 0, 0, 0, '0);
    t_start = cyc;   // cycles counted from the accepting edge
    // LMM traffic and a SWAP while it runs
    fork
      begin
        for (int i = 0; i < 6; i++) send(C_LMMW, 0, i, 64'(i), '0);
        send(C_SWAP, 0, 0, 0, '0);
      end
      begin
        @(posedge exec_done); #1; t_done = cyc;
      end
    join
    chk(tok_seen == NIT * 4, "token count");
    chk(t_done - t_start == NIT * 4 + NPE * PE_LAT + 2, $sformatf("EXEC duration %0d", t_done - t_start));
    chk(lmm_during_exec == 6, "LMM writes accepted during EXEC");
    chk(ctl_wait > 0, "SWAP waited for EXEC");
    chk(cnt_conf == NPE + 2 && cnt_load == 7 && cnt_drain == 1, "phase counters");
    chk(cnt_exec == NIT * 4 + NPE * PE_LAT + 2, "EXEC cycle counter");
    // swap pulse
    cmd_valid = 1; cmd.op = C_SWAP; #1;
    chk(swap, "swap pulse when idle");
    @(posedge clk); #1; cmd_valid = 0; #1;
    chk(!swap, "swap pulse ends");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
