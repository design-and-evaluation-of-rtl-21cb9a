// tb_imax_top: end-to-end, full-size testbench of imax_top at its default
// parameters (2 lanes of 64 PEs, 32 KB LMM banks). A behavioural word
// memory with random read latency and write stalls serves both lanes' DMA
// ports. Playing the host, the test builds one descriptor list per lane and
// runs both lanes at once: lane 0 works on Whisper-tiny-like sizes (FP16
// rows of 1541 elements, Q8_0 rows of 12 blocks = 384), lane 1 on
// Whisper-base-like sizes (521 elements, 16 blocks = 512). Per lane:
// configure the FP16 kernel, LOAD its operands, SWAP, EXEC, LOAD the Q8_0
// operands while EXEC runs, SWAP, DRAIN the FP16 results, configure and run
// the Q8_0 kernel, SWAP, DRAIN. The host then adds the FP16 residual (the
// L mod 16 tail left by the burst split) and checks all results against
// reference models. Mechanism counters (loads during EXEC, swaps, EXEC
// runs per kernel, drained words, residual elements, lanes running at the
// same time) must all be non-zero. A watchdog ends hung runs.
`timescale 1ns/1ps
module tb_imax_top;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_kernels_pkg::*;
  localparam int NL = 2, NPE = 64, BURST = 16;
  localparam int LBASE = 16384;          // memory words per lane area
  localparam int OUT = 3000;             // result address in the LMMs
  localparam int RES = 8000;             // result area in a lane's memory

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic desc_valid [NL], desc_ready [NL], idle [NL], busy [NL], exec_done [NL];
  dma_desc_t desc [NL];
  logic rd_req_valid [NL], rd_req_ready [NL], rd_rsp_valid [NL];
  logic [31:0] rd_req_addr [NL], wr_addr [NL];
  word_t rd_rsp_data [NL], wr_data [NL];
  logic wr_valid [NL], wr_ready [NL];
  logic [31:0] cnt_conf [NL], cnt_load [NL], cnt_drain [NL], cnt_exec [NL];

  imax_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- behavioural memory, one port pair per lane
  word_t mem [0:NL*LBASE-1];
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int m_overlap = 0, m_drain = 0, m_both = 0, m_exec = 0;
  logic [31:0] last_load [NL];

  for (genvar l = 0; l < NL; l++) begin : g_mem
    word_t q_d [$];
    int    q_t [$];
    always @(posedge clk) begin
      rd_req_ready[l] <= ($urandom_range(0, 3) != 0);
      wr_ready[l]     <= ($urandom_range(0, 2) != 0);
      if (rst_n) begin
        if (rd_req_valid[l] && rd_req_ready[l]) begin
          q_d.push_back(mem[rd_req_addr[l]]);
          q_t.push_back(int'(cyc) + $urandom_range(2, 8));
        end
        if (rd_rsp_valid[l]) begin void'(q_d.pop_front()); void'(q_t.pop_front()); end
        if (wr_valid[l] && wr_ready[l]) begin mem[wr_addr[l]] <= wr_data[l]; m_drain++; end
      end
    end
    always_comb begin
      rd_rsp_valid[l] = (q_t.size() > 0) && (q_t[0] <= int'(cyc));
      rd_rsp_data[l]  = (q_t.size() > 0) ? q_d[0] : '0;
    end
    // LMM loads taken while the lane executes (double buffering)
    always @(negedge clk) begin
      if (busy[l] && cnt_load[l] != last_load[l]) m_overlap++;
      last_load[l] = cnt_load[l];
      if (exec_done[l]) m_exec++;
    end
  end
  always @(negedge clk) if (!idle[0] && !idle[1]) m_both++;

  // ---------------- host
  dma_desc_t dl [NL][$];
  int m_swap = 0, m_resid = 0;

  function automatic dma_desc_t d_cmd(cmd_op_e op, int pe, int addr, word_t data, pe_cfg_t c);
    dma_desc_t d = '0;
    d.kind = D_CMD; d.cmd.op = op; d.cmd.pe = PEW'(pe); d.cmd.addr = AW'(addr);
    d.cmd.data = data; d.cmd.cfg = c;
    return d;
  endfunction
  function automatic dma_desc_t d_mov(dma_kind_e k, int ddr, int pe, int la, int n);
    dma_desc_t d = '0;
    d.kind = k; d.ddr_addr = 32'(ddr); d.pe = PEW'(pe); d.lmm_addr = AW'(la); d.nwords = 16'(n);
    return d;
  endfunction
  task automatic add_prog(int l, prog_t p, regs_t rv, int niter, int ist, int tst);
    for (int i = 0; i < NPE; i++) dl[l].push_back(d_cmd(C_CONF, i, 0, '0, p[i]));
    for (int r = 0; r < 32; r++) dl[l].push_back(d_cmd(C_REGV, 0, r, rv[r], '0));
    dl[l].push_back(d_cmd(C_RANGE, 0, 0, {16'(tst), 16'(ist), 32'(niter)}, '0));
  endtask

  task automatic issue(int l);
    while (dl[l].size() > 0) begin
      @(negedge clk);
      desc[l] = dl[l][0];
      desc_valid[l] = 1;
      @(posedge clk);
      while (!desc_ready[l]) @(posedge clk);
      if (dl[l][0].kind == D_CMD && dl[l][0].cmd.op == C_SWAP) m_swap++;
      void'(dl[l].pop_front());
      #1 desc_valid[l] = 0;
    end
    @(negedge clk);
    while (!idle[l]) @(negedge clk);
  endtask

  int Ls [NL] = '{1541, 521};
  int NB [NL] = '{12, 16};
  logic [15:0] x [NL][4][], y [NL][];
  logic [15:0] d0 [NL][4][], d1 [NL][];
  logic [7:0]  q0 [NL][4][], q1 [NL][];

  function automatic logic [15:0] rnd_h();
    return {1'($urandom), 5'(10 + $urandom % 10), 10'($urandom)};
  endfunction

  initial begin
    #20_000_000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("FAIL: watchdog");
    $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) begin desc_valid[l] = 0; desc[l] = '0; last_load[l] = 0; end
    for (int i = 0; i < NL * LBASE; i++) mem[i] = '0;
    // ---- data and descriptor lists
    for (int l = 0; l < NL; l++) begin
      int L, NW, nb, base;
      regs_t rv;
      L = Ls[l]; NW = (L / BURST) * BURST / 4; nb = NB[l]; base = l * LBASE;
      y[l] = new[L]; d1[l] = new[nb]; q1[l] = new[32 * nb];
      for (int i = 0; i < L; i++) y[l][i] = rnd_h();
      for (int b = 0; b < nb; b++) d1[l][b] = {1'b0, 5'(10 + $urandom % 4), 10'($urandom)};
      for (int i = 0; i < 32 * nb; i++) q1[l][i] = 8'($urandom);
      for (int t = 0; t < 4; t++) begin
        x[l][t] = new[L]; d0[l][t] = new[nb]; q0[l][t] = new[32 * nb];
        for (int i = 0; i < L; i++) x[l][t][i] = rnd_h();
        for (int b = 0; b < nb; b++) d0[l][t][b] = {1'($urandom), 5'(10 + $urandom % 4), 10'($urandom)};
        for (int i = 0; i < 32 * nb; i++) q0[l][t][i] = 8'($urandom);
      end
      // FP16 operands: 4 rows then the vector, 4 halves per word
      for (int t = 0; t < 5; t++)
        for (int w = 0; w < NW; w++)
          for (int k = 0; k < 4; k++)
            mem[base + t * NW + w][16*k +: 16] = (t < 4) ? x[l][t][4*w+k] : y[l][4*w+k];
      // Q8_0 operands: PE 0 gets the scales, PE k+1 quant word k; one
      // contiguous array of 5*nb words per PE (4 rows then the vector)
      for (int p = 0; p < 5; p++)
        for (int t = 0; t < 5; t++)
          for (int b = 0; b < nb; b++) begin
            word_t w = '0;
            if (p == 0) w[15:0] = (t < 4) ? d0[l][t][b] : d1[l][b];
            else
              for (int k = 0; k < 8; k++)
                w[8*k +: 8] = (t < 4) ? q0[l][t][32*b + 8*(p-1) + k] : q1[l][32*b + 8*(p-1) + k];
            mem[base + 4096 + p * 256 + t * nb + b] = w;
          end
      add_prog(l, fp16_prog(), fp16_regv(0, 4 * NW, OUT), NW, 1, NW);
      dl[l].push_back(d_mov(D_LOAD, base, 0, 0, 5 * NW));
      dl[l].push_back(d_cmd(C_SWAP, 0, 0, '0, '0));
      dl[l].push_back(d_cmd(C_EXEC, 0, 0, '0, '0));
      for (int p = 0; p < 5; p++) dl[l].push_back(d_mov(D_LOAD, base + 4096 + p * 256, p, 0, 5 * nb));
      dl[l].push_back(d_cmd(C_SWAP, 0, 0, '0, '0));
      dl[l].push_back(d_mov(D_DRAIN, base + RES, FP16_PES - 1, OUT, 4));
      rv = '0;
      for (int k = 0; k < 5; k++) begin rv[B0 + 5'(k)] = 0; rv[B5 + 5'(k)] = 64'(4 * nb); end
      rv[A1] = OUT;
      add_prog(l, q8_prog(), rv, nb, 1, nb);
      dl[l].push_back(d_cmd(C_EXEC, 0, 0, '0, '0));
      dl[l].push_back(d_cmd(C_SWAP, 0, 0, '0, '0));
      dl[l].push_back(d_mov(D_DRAIN, base + RES + 4, Q8_PES - 1, OUT, 4));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      issue(0);
      issue(1);
    join
    // ---- host side: check results, add the FP16 residual
    for (int l = 0; l < NL; l++) begin
      int L, MAIN, nb;
      L = Ls[l]; MAIN = (L / BURST) * BURST; nb = NB[l];
      for (int t = 0; t < 4; t++) begin
        logic [15:0] xs [], ys [];
        logic [15:0] da [], db [];
        logic [7:0]  qa [], qb [];
        logic [31:0] e, got;
        real res, full;
        xs = new[MAIN]; ys = new[MAIN];
        for (int i = 0; i < MAIN; i++) begin xs[i] = x[l][t][i]; ys[i] = y[l][i]; end
        e = fp16_ref(xs, ys, MAIN);
        got = mem[l * LBASE + RES + t][31:0];
        check(got === e, $sformatf("lane %0d FP16 row %0d: got %h exp %h", l, t, got, e));
        res = f2r(got);
        full = 0.0;
        for (int i = MAIN; i < L; i++) begin
          res += f2r(h2f_bits(x[l][t][i])) * f2r(h2f_bits(y[l][i]));
          m_resid++;
        end
        for (int i = 0; i < L; i++) full += f2r(h2f_bits(x[l][t][i])) * f2r(h2f_bits(y[l][i]));
        check((res - full) < 1e-3 * (1.0 + (full < 0 ? -full : full)) &&
              (full - res) < 1e-3 * (1.0 + (full < 0 ? -full : full)),
              $sformatf("lane %0d FP16 row %0d with residual: %f vs %f", l, t, res, full));
        da = new[nb]; db = new[nb]; qa = new[32 * nb]; qb = new[32 * nb];
        for (int b = 0; b < nb; b++) begin da[b] = d0[l][t][b]; db[b] = d1[l][b]; end
        for (int i = 0; i < 32 * nb; i++) begin qa[i] = q0[l][t][i]; qb[i] = q1[l][i]; end
        e = q8_ref(da, db, qa, qb, nb);
        got = mem[l * LBASE + RES + 4 + t][31:0];
        check(got === e, $sformatf("lane %0d Q8 row %0d: got %h exp %h", l, t, got, e));
      end
      check(cnt_drain[l] == 8, $sformatf("lane %0d drained %0d words", l, cnt_drain[l]));
    end
    $display("mechanisms: overlap=%0d swap=%0d exec=%0d drain=%0d resid=%0d both=%0d",
             m_overlap, m_swap, m_exec, m_drain, m_resid, m_both);
    check(m_overlap > 0, "LMM loads during EXEC never happened");
    check(m_swap == 6, "bank swaps");
    check(m_exec == 4, "EXEC runs (FP16 and Q8_0 on both lanes)");
    check(m_drain == 16, "drained words");
    check(m_resid > 0, "host residual never used");
    check(m_both > 0, "lane channels never worked at the same time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
