// tb_dma_channel: self-checking testbench of dma_channel. A behavioural
// word memory accepts read requests with random back-pressure and returns
// the responses in order after a random 1-6 cycle delay; its write port
// stalls at random. A model lane keeps one LMM array per PE, answers LMMR
// one cycle after it is taken, refuses control commands while a fake "busy"
// is high, and records every control command. The test loads blocks of
// random data into several PEs, drains them back to another buffer area,
// and checks the LMM contents, the drained words, the order and count of
// control commands, and that a zero-length descriptor finishes at once.
// Checks and stimulus are this design's own; a watchdog ends hung runs.
`timescale 1ns/1ps
module tb_dma_channel;
  import imax_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic desc_valid, desc_ready, idle;
  dma_desc_t desc;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [31:0] rd_req_addr, wr_addr;
  word_t rd_rsp_data, wr_data;
  logic wr_valid, wr_ready;
  logic lane_cmd_valid, lane_cmd_ready, lane_rsp_valid;
  lane_cmd_t lane_cmd;
  word_t lane_rsp_data;

  dma_channel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- behavioural memory ----------------
  word_t mem [0:4095];
  word_t      rq_data [$];
  int         rq_due  [$];
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    rd_req_ready <= ($urandom_range(0, 3) != 0);
    wr_ready     <= ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      rq_data.push_back(mem[rd_req_addr[11:0]]);
      rq_due.push_back(int'(cyc) + $urandom_range(1, 6));
    end
    if (wr_valid && wr_ready) mem[wr_addr[11:0]] <= wr_data;
  end
  always_comb begin
    rd_rsp_valid = 1'b0;
    rd_rsp_data  = '0;
    if (rq_due.size() > 0 && rq_due[0] <= int'(cyc)) begin
      rd_rsp_valid = 1'b1;
      rd_rsp_data  = rq_data[0];
    end
  end
  always @(posedge clk) if (rd_rsp_valid) begin
    void'(rq_data.pop_front());
    void'(rq_due.pop_front());
  end

  // ---------------- model lane ----------------
  word_t lmm [0:7][0:255];
  logic  busy = 0;
  cmd_op_e ctl_log [$];
  assign lane_cmd_ready = (lane_cmd.op == C_LMMW || lane_cmd.op == C_LMMR) || !busy;
  always @(posedge clk) begin
    lane_rsp_valid <= 1'b0;
    if (rst_n && lane_cmd_valid && lane_cmd_ready) begin
      case (lane_cmd.op)
        C_LMMW: lmm[lane_cmd.pe[2:0]][lane_cmd.addr[7:0]] <= lane_cmd.data;
        C_LMMR: begin
          lane_rsp_valid <= 1'b1;
          lane_rsp_data  <= lmm[lane_cmd.pe[2:0]][lane_cmd.addr[7:0]];
        end
        default: ctl_log.push_back(lane_cmd.op);
      endcase
    end
  end

  task automatic run(dma_kind_e k, int ddr, int pe, int la, int n, cmd_op_e cop = C_SWAP);
    desc = '0;
    desc.kind = k; desc.ddr_addr = ddr; desc.pe = PEW'(pe);
    desc.lmm_addr = AW'(la); desc.nwords = 16'(n); desc.cmd.op = cop;
    @(negedge clk);
    while (!desc_ready) @(negedge clk);
    desc_valid = 1;
    @(negedge clk);
    desc_valid = 0;
    while (!idle) @(negedge clk);
  endtask

  initial begin
    #2_000_000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("FAIL: watchdog");
    $finish;
  end

  initial begin
    int ok;
    desc_valid = 0; desc = '0;
    for (int i = 0; i < 4096; i++) mem[i] = {$urandom, $urandom};
    for (int p = 0; p < 8; p++) for (int a = 0; a < 256; a++) lmm[p][a] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // loads of several lengths into several PEs
    run(D_LOAD, 100, 0, 0, 16);
    run(D_LOAD, 200, 3, 10, 37);
    run(D_LOAD, 300, 7, 200, 1);
    run(D_LOAD, 400, 5, 0, 0);          // empty descriptor
    ok = 1;
    for (int i = 0; i < 16; i++) if (lmm[0][i] !== mem[100 + i]) ok = 0;
    check(ok, "load 16 words to PE0");
    ok = 1;
    for (int i = 0; i < 37; i++) if (lmm[3][10 + i] !== mem[200 + i]) ok = 0;
    check(ok, "load 37 words to PE3");
    check(lmm[7][200] === mem[300], "load 1 word to PE7");
    check(lmm[7][201] === '0, "load wrote past its end");
    ok = 1;
    for (int i = 0; i < 256; i++) if (lmm[5][i] !== '0) ok = 0;
    check(ok, "empty load wrote nothing");

    // drains
    run(D_DRAIN, 1000, 3, 10, 37);
    ok = 1;
    for (int i = 0; i < 37; i++) if (mem[1000 + i] !== mem[200 + i]) ok = 0;
    check(ok, "drain 37 words from PE3");
    run(D_DRAIN, 2000, 0, 4, 5);
    ok = 1;
    for (int i = 0; i < 5; i++) if (mem[2000 + i] !== mem[104 + i]) ok = 0;
    check(ok, "drain 5 words from PE0");
    check(mem[2005] !== mem[109] || mem[109] === '0, "drain wrote past its end");

    // control commands, one of them while the lane is busy
    run(D_CMD, 0, 0, 0, 0, C_CONF);
    fork
      begin busy = 1; repeat (20) @(negedge clk); busy = 0; end
      run(D_CMD, 0, 0, 0, 0, C_EXEC);
    join
    run(D_CMD, 0, 0, 0, 0, C_SWAP);
    check(ctl_log.size() == 3, "three control commands passed");
    if (ctl_log.size() == 3)
      check(ctl_log[0] == C_CONF && ctl_log[1] == C_EXEC && ctl_log[2] == C_SWAP,
            "control command order");
    check(rq_due.size() == 0, "no outstanding reads");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
