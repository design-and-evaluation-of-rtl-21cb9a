// tb_imax_lane: runs both dot-product kernels on a full 64-PE lane (with
// small LMMs), driving lane commands directly. FP16: four rows of length
// 389 against one vector; the 384-element aligned part (24 bursts of 16)
// runs on the lane and the 5-element residual is added by the testbench in
// the role of the host. While the FP16 kernel executes, the Q8_0 operands
// are loaded into the other LMM bank; after a bank swap the FP16 results are
// drained and the Q8_0 kernel (four rows of 12 blocks) runs on the data that
// was prefetched. Checked: every result against the reference, the EXEC
// cycle count (niter*4 + 64*PE_LAT + 2) and that loads overlapped EXEC.
module tb_imax_lane;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_kernels_pkg::*;
  localparam int NPE = 64, DEPTH = 1024;
  localparam int L = 389, BURST = 16;
  localparam int MAIN = (L / BURST) * BURST, NW = MAIN / 4;
  localparam int NBLK = 12;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rsp_valid, busy, exec_done;
  lane_cmd_t cmd;
  word_t rsp_data;
  logic [31:0] cnt_conf, cnt_load, cnt_drain, cnt_exec;
  int checks = 0, failures = 0, cyc = 0;
  int overlap = 0;

  imax_lane #(.NPE(NPE), .LMM_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (busy && cmd_valid && cmd_ready && cmd.op == C_LMMW) overlap++;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input cmd_op_e op, input int pe, input int addr, input word_t data,
                      input pe_cfg_t c);
    cmd_valid = 1; cmd.op = op; cmd.pe = PEW'(pe); cmd.addr = AW'(addr); cmd.data = data;
    cmd.cfg = c;
    #1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    cmd_valid = 0;
  endtask

  task automatic read(input int pe, input int addr, output word_t d);
    send(C_LMMR, pe, addr, 0, '0);
    d = rsp_data;
  endtask

  task automatic load_prog(input prog_t p, input regs_t rv, input int niter, input int ist,
                         input int tst);
    for (int i = 0; i < NPE; i++) send(C_CONF, i, 0, 0, p[i]);
    for (int r = 0; r < 32; r++) send(C_REGV, 0, r, rv[r], '0);
    send(C_RANGE, 0, 0, {16'(tst), 16'(ist), 32'(niter)}, '0);
  endtask

  function automatic logic [15:0] rnd_h();
    return {1'($urandom), 5'(10 + $urandom % 10), 10'($urandom)};
  endfunction

  logic [15:0] x [4][L];
  logic [15:0] y [L];
  logic [15:0] d0 [4][NBLK], d1 [NBLK];
  logic [7:0]  q0 [4][32*NBLK], q1 [32*NBLK];

  initial begin
    int t0, t1;
    word_t w;
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 4; t++) for (int i = 0; i < L; i++) x[t][i] = rnd_h();
    for (int i = 0; i < L; i++) y[i] = rnd_h();
    for (int b = 0; b < NBLK; b++) begin
      d1[b] = {1'b0, 5'(10 + $urandom % 4), 10'($urandom)};
      for (int t = 0; t < 4; t++) d0[t][b] = {1'($urandom), 5'(10 + $urandom % 4), 10'($urandom)};
    end
    for (int i = 0; i < 32 * NBLK; i++) begin
      q1[i] = 8'($urandom);
      for (int t = 0; t < 4; t++) q0[t][i] = 8'($urandom);
    end
    // ---- FP16 kernel: program and load (src0 rows at 0, src1 at 4*NW)
    load_prog(fp16_prog(), fp16_regv(0, 4 * NW, 900), NW, 1, NW);
    for (int t = 0; t < 4; t++)
      for (int wi = 0; wi < NW; wi++)
        send(C_LMMW, 0, t * NW + wi, {x[t][4*wi+3], x[t][4*wi+2], x[t][4*wi+1], x[t][4*wi]}, '0);
    for (int wi = 0; wi < NW; wi++)
      send(C_LMMW, 0, 4 * NW + wi, {y[4*wi+3], y[4*wi+2], y[4*wi+1], y[4*wi]}, '0);
    send(C_SWAP, 0, 0, 0, '0);
    send(C_EXEC, 0, 0, 0, '0);
    t0 = cyc;
    // ---- prefetch the Q8_0 operands into the free bank while EXEC runs;
    // PE k (k = 0..4) loads word k of each block from its own LMM
    for (int t = 0; t < 4; t++)
      for (int b = 0; b < NBLK; b++) begin
        send(C_LMMW, 0, 5 * (t * NBLK + b), {48'd0, d0[t][b]}, '0);
        for (int k = 0; k < 4; k++)
          send(C_LMMW, k + 1, 5 * (t * NBLK + b) + 1 + k,
               {q0[t][32*b+8*k+7], q0[t][32*b+8*k+6], q0[t][32*b+8*k+5], q0[t][32*b+8*k+4],
                q0[t][32*b+8*k+3], q0[t][32*b+8*k+2], q0[t][32*b+8*k+1], q0[t][32*b+8*k]}, '0);
      end
    for (int b = 0; b < NBLK; b++) begin
      send(C_LMMW, 0, 5 * (4 * NBLK + b), {48'd0, d1[b]}, '0);
      for (int k = 0; k < 4; k++)
        send(C_LMMW, k + 1, 5 * (4 * NBLK + b) + 1 + k,
             {q1[32*b+8*k+7], q1[32*b+8*k+6], q1[32*b+8*k+5], q1[32*b+8*k+4],
              q1[32*b+8*k+3], q1[32*b+8*k+2], q1[32*b+8*k+1], q1[32*b+8*k]}, '0);
    end
    checks++; if (overlap == 0) begin failures++; $display("no load during EXEC"); end
    if (busy) @(posedge exec_done);
    #1 t1 = cyc;
    checks++;
    if (t1 - t0 != NW * 4 + NPE * PE_LAT + 2) begin
      failures++; $display("FP16 EXEC took %0d cycles", t1 - t0);
    end
    send(C_SWAP, 0, 0, 0, '0);
    for (int t = 0; t < 4; t++) begin
      logic [15:0] xs [], ys [];
      logic [31:0] e, got;
      real res;
      xs = new[MAIN]; ys = new[MAIN];
      for (int i = 0; i < MAIN; i++) begin xs[i] = x[t][i]; ys[i] = y[i]; end
      e = fp16_ref(xs, ys, MAIN);
      read(FP16_PES - 1, 900 + t, w);
      got = w[31:0];
      checks++;
      if (got !== e) begin failures++; $display("FP16 row %0d: got %h exp %h", t, got, e); end
      // host adds the residual elements
      res = f2r(got);
      for (int i = MAIN; i < L; i++) res += f2r(h2f_bits(x[t][i])) * f2r(h2f_bits(y[i]));
      checks++;
      begin
        real full;
        full = 0.0;
        for (int i = 0; i < L; i++) full += f2r(h2f_bits(x[t][i])) * f2r(h2f_bits(y[i]));
        if ((res - full) > 1e-3 * (1.0 + (full < 0 ? -full : full)) ||
            (full - res) > 1e-3 * (1.0 + (full < 0 ? -full : full))) begin
          failures++; $display("FP16 row %0d with residual: %f vs %f", t, res, full);
        end
      end
    end
    // ---- Q8_0 kernel on the prefetched bank
    load_prog(q8_prog(), q8_regv(0, 5 * 4 * NBLK, 950), NBLK, 5, 5 * NBLK);
    send(C_EXEC, 0, 0, 0, '0);
    t0 = cyc;
    @(posedge exec_done);
    #1 t1 = cyc;
    checks++;
    if (t1 - t0 != NBLK * 4 + NPE * PE_LAT + 2) begin
      failures++; $display("Q8 EXEC took %0d cycles", t1 - t0);
    end
    send(C_SWAP, 0, 0, 0, '0);
    for (int t = 0; t < 4; t++) begin
      logic [15:0] da [], db [];
      logic [7:0] qa [], qb [];
      logic [31:0] e;
      da = new[NBLK]; db = new[NBLK]; qa = new[32 * NBLK]; qb = new[32 * NBLK];
      for (int b = 0; b < NBLK; b++) begin da[b] = d0[t][b]; db[b] = d1[b]; end
      for (int i = 0; i < 32 * NBLK; i++) begin qa[i] = q0[t][i]; qb[i] = q1[i]; end
      e = q8_ref(da, db, qa, qb, NBLK);
      read(Q8_PES - 1, 950 + t, w);
      checks++;
      if (w[31:0] !== e) begin failures++; $display("Q8 row %0d: got %h exp %h", t, w[31:0], e); end
    end
    checks++;
    if (cnt_exec == 0 || cnt_load == 0 || cnt_drain != 8) begin
      failures++; $display("counters %0d %0d %0d", cnt_exec, cnt_load, cnt_drain);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
