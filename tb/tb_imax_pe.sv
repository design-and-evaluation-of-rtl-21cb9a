// tb_imax_pe: runs one PE the way the lane does, with a new token every cycle
// and four threads in rotation. Phase 1: ALU1 accumulates a*b into c with
// UPDATE set while AG1 loads a word from the LMM (filled through the DMA
// port, then swapped to the PE side) and AG2 stores each thread's final sum
// on its last iteration. Checked: the ALU result in its destination register
// for every token (against a real-arithmetic running sum per thread), the
// loaded word, the pass-through of untouched registers, the 5-cycle stage
// latency, and the stored sums read back through the DMA port after a swap.
module tb_imax_pe;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  localparam int NIT = 12;
  logic clk = 0, rst_n = 0;
  pe_cfg_t cfg;
  tok_t in_tok, out_tok;
  regs_t in_regs, out_regs;
  logic swap, pe_bank, d_re, d_we;
  logic [AW-1:0] d_addr;
  word_t d_wdata, d_rdata;
  int checks = 0, failures = 0, cyc = 0;

  imax_pe #(.LMM_DEPTH(256)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t lmm_img [256];
  word_t acc [4];
  regs_t exp_q [$];
  int    cyc_q [$];
  tok_t  tok_q [$];

  always @(negedge clk) begin
    if (rst_n && out_tok.valid) begin
      regs_t e;
      tok_t t;
      int ic;
      e = exp_q.pop_front(); ic = cyc_q.pop_front(); t = tok_q.pop_front();
      checks++;
      if (out_regs !== e) begin
        failures++;
        if (failures < 6)
          for (int k = 0; k < 32; k++)
            if (out_regs[k] !== e[k]) $display("reg %0d got %h exp %h", k, out_regs[k], e[k]);
      end
      checks++; if (out_tok !== t) failures++;
      checks++; if (cyc - ic != PE_LAT) failures++;
    end
  end

  initial begin
    swap = 0; d_re = 0; d_we = 0; d_addr = 0; d_wdata = 0;
    in_tok = '0; in_regs = '0;
    cfg = '0;
    cfg.a1_op = A1_FMA2; cfg.src_a = 5'd0; cfg.src_b = 5'd1; cfg.src_c = 5'd2;
    cfg.acc = 1; cfg.wr = 1; cfg.dst = 5'd3;
    cfg.a2_op = A2_PASS; cfg.a3_op = A3_PASS;
    cfg.ag1 = '{en: 1'b1, ra: R_TIDX, rb: 5'd4, mask_a: '1, mask_b: '1};
    cfg.ld1_dst = 5'd5;
    cfg.ag2 = '{en: 1'b1, ra: R_THREAD, rb: 5'd6, mask_a: '1, mask_b: '1};
    cfg.st = 1; cfg.st_last = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // DMA fills the free bank, then it is handed to the PE
    for (int i = 0; i < 256; i++) begin
      d_we = 1; d_addr = AW'(i); d_wdata = {$urandom, $urandom}; lmm_img[i] = d_wdata;
      @(posedge clk); #1;
    end
    d_we = 0; swap = 1; @(posedge clk); #1; swap = 0;
    // stream NIT iterations of 4 threads
    for (int it = 0; it < NIT; it++) begin
      for (int t = 0; t < 4; t++) begin
        regs_t e;
        for (int k = 0; k < 32; k++) in_regs[k] = {$urandom, $urandom};
        for (int h = 0; h < 2; h++) begin
          in_regs[0][32*h +: 32] = {1'($urandom), 8'(120 + $urandom % 14), 23'($urandom)};
          in_regs[1][32*h +: 32] = {1'($urandom), 8'(120 + $urandom % 14), 23'($urandom)};
          in_regs[2][32*h +: 32] = 32'h3F80_0000;   // initial c = 1.0
        end
        in_regs[4] = 64'd16;                         // load base
        in_regs[6] = 64'd100;                        // store base
        in_regs[R_THREAD] = 64'(t);
        in_regs[R_TIDX] = 64'(t * 40 + it);
        in_tok = '{valid: 1'b1, thread: 2'(t), first: (it == 0), last: (it == NIT - 1)};
        if (it == 0) acc[t] = in_regs[2];
        for (int h = 0; h < 2; h++)
          acc[t][32*h +: 32] = r2f(f2r(in_regs[0][32*h +: 32]) * f2r(in_regs[1][32*h +: 32])
                                   + f2r(acc[t][32*h +: 32]));
        e = in_regs;
        e[5] = lmm_img[16 + t * 40 + it];
        e[3] = acc[t];
        exp_q.push_back(e); cyc_q.push_back(cyc); tok_q.push_back(in_tok);
        @(posedge clk); #1;
      end
    end
    in_tok = '0;
    repeat (PE_LAT + 2) @(posedge clk);
    #1;
    checks++; if (exp_q.size() != 0) failures++;
    // the stores went to the PE bank; swap and drain through the DMA port
    swap = 1; @(posedge clk); #1; swap = 0;
    for (int t = 0; t < 4; t++) begin
      d_re = 1; d_addr = AW'(100 + t);
      @(posedge clk); #1;
      checks++;
      if (d_rdata !== acc[t]) begin
        failures++;
        $display("stored sum thread %0d: got %h exp %h", t, d_rdata, acc[t]);
      end
    end
    d_re = 0;
    // words of the LMM not stored to are unchanged
    d_re = 1; d_addr = AW'(99); @(posedge clk); #1;
    checks++; if (d_rdata !== lmm_img[99]) failures++;
    d_re = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
