// tb_kernels_pkg: lane programs (per-PE configuration words and initial
// register values) for the two dot-product kernels, and their reference
// results, shared by the lane and top-level testbenches.
//
// Both kernels compute four dot products at once, one per thread (column):
// thread t multiplies row t of src0 with the src1 vector.
//
// FP16 kernel, 11 PEs. LMM of PE 0: src0 rows from word S0 (row stride
// TSTRIDE words), src1 from word S1, four FP16 values per word; one
// iteration per word. PE0 loads one word of each; PE1..PE4 convert the low
// and high FP16 pairs to FP32 pairs (ALU2); PE5/PE6 accumulate them with the
// 2-way FP32 FMA and UPDATE; PE7 adds the two accumulators, PE8 swaps the
// halves (ALU3 rotate by 32), PE9 adds the halves; PE10 stores the sum of
// thread t at word OUT+t of its own LMM on the thread's last iteration.
//
// Q8_0 kernel, 31 PEs. One iteration per Q8_0 block of 32 int8 values and an
// FP16 scale, packed as five words per block: the scale in bits 15:0 of word
// 0, the int8 values in words 1..4, so the index step is 5 words. PE k
// (k = 0..4) loads word k of each block of both operands from its own LMM; the scales are converted and
// multiplied (d = d0*d1); each quant word is reduced with OP_SML8 on its low
// half, ALU3 shifts both operands right by 32, OP_SML8 on the high half and
// OP_AD32 join them; OP_AD32 adds the four words, a rotate and OP_AD32 add
// the two 32-bit lanes, ALU2 converts the integer sum to FP32 and the FMA
// with UPDATE accumulates sum*d over the blocks; the last PE stores it.
package tb_kernels_pkg;
  import imax_pkg::*;
  import tb_fp_pkg::*;

  localparam rsel_t A0 = 5'd0,  A1 = 5'd1,  A2 = 5'd2,  A3 = 5'd3,  A4 = 5'd4,
                    A5 = 5'd5,  A6 = 5'd6,  A7 = 5'd7,  A8 = 5'd8,  A9 = 5'd9,
                    A10 = 5'd10, A11 = 5'd11, A12 = 5'd12, A13 = 5'd13,
                    A14 = 5'd14, A15 = 5'd15;
  localparam rsel_t B0 = 5'd16, B1 = 5'd17, B2 = 5'd18, B3 = 5'd19, B4 = 5'd20,
                    B5 = 5'd21, B6 = 5'd22, B7 = 5'd23, B8 = 5'd24, B9 = 5'd25,
                    B10 = 5'd26, B11 = 5'd27, B12 = 5'd28;

  localparam int FP16_PES = 11;
  localparam int Q8_PES   = 31;

  function automatic pe_cfg_t op(input alu1_op_e o, input rsel_t sa, input rsel_t sb,
                                 input rsel_t sc, input logic acc, input alu2_op_e a2,
                                 input alu3_op_e a3, input int sh, input rsel_t dst);
    pe_cfg_t c;
    c = '0;
    c.a1_op = o; c.src_a = sa; c.src_b = sb; c.src_c = sc; c.acc = acc;
    c.a2_op = a2; c.a3_op = a3; c.a3_sh = 6'(sh); c.wr = 1'b1; c.dst = dst;
    return c;
  endfunction

  function automatic pe_cfg_t nop();
    pe_cfg_t c;
    c = '0;
    return c;
  endfunction

  function automatic ag_cfg_t ag(input rsel_t ra, input rsel_t rb);
    return '{en: 1'b1, ra: ra, rb: rb, mask_a: '1, mask_b: '1};
  endfunction

  // ---------------------------------------------------------------- FP16
  typedef pe_cfg_t prog_t [64];

  function automatic prog_t fp16_prog();
    prog_t p;
    for (int i = 0; i < 64; i++) p[i] = nop();
    p[0].ag1 = ag(R_TIDX, A0); p[0].ld1_dst = A4;        // src0 word
    p[0].ag2 = ag(R_IIDX, A1); p[0].ld2_dst = A5;        // src1 word
    p[1]  = op(A1_PASS, A4, A0, A0, 0, A2_CVTL, A3_PASS, 0, A6);
    p[2]  = op(A1_PASS, A5, A0, A0, 0, A2_CVTL, A3_PASS, 0, A7);
    p[3]  = op(A1_PASS, A4, A0, A0, 0, A2_CVTH, A3_PASS, 0, A8);
    p[4]  = op(A1_PASS, A5, A0, A0, 0, A2_CVTH, A3_PASS, 0, A9);
    p[5]  = op(A1_FMA2, A6, A7, A2, 1, A2_PASS, A3_PASS, 0, A10);
    p[6]  = op(A1_FMA2, A8, A9, A2, 1, A2_PASS, A3_PASS, 0, A11);
    p[7]  = op(A1_FAD2, A10, A0, A11, 0, A2_PASS, A3_PASS, 0, A12);
    p[8]  = op(A1_PASS, A12, A0, A0, 0, A2_PASS, A3_ROL, 32, A13);
    p[9]  = op(A1_FAD2, A12, A0, A13, 0, A2_PASS, A3_PASS, 0, A14);
    p[10] = op(A1_PASS, A14, A0, A0, 0, A2_PASS, A3_PASS, 0, A15);
    p[10].ag2 = ag(A3, R_THREAD); p[10].st = 1'b1; p[10].st_last = 1'b1;
    return p;
  endfunction

  // initial registers: A0 = S0, A1 = S1, A2 = 0 (accumulator start), A3 = OUT
  function automatic regs_t fp16_regv(input int s0, input int s1, input int out);
    regs_t r;
    r = '0;
    r[A0] = 64'(s0); r[A1] = 64'(s1); r[A3] = 64'(out);
    return r;
  endfunction

  // reference, in the kernel's order of FP32 operations
  function automatic logic [31:0] fp16_ref(input logic [15:0] x [], input logic [15:0] y [],
                                           input int n);
    logic [31:0] acc [4];
    logic [31:0] s0, s1;
    for (int k = 0; k < 4; k++) acc[k] = 32'd0;
    for (int i = 0; i < n; i++)
      acc[i % 4] = r2f(f2r(h2f_bits(x[i])) * f2r(h2f_bits(y[i])) + f2r(acc[i % 4]));
    s0 = r2f(f2r(acc[0]) + f2r(acc[2]));
    s1 = r2f(f2r(acc[1]) + f2r(acc[3]));
    return r2f(f2r(s0) + f2r(s1));
  endfunction

  // ---------------------------------------------------------------- Q8_0
  function automatic prog_t q8_prog();
    prog_t p;
    int k;
    for (int i = 0; i < 64; i++) p[i] = nop();
    // loads: scale words and the four quant words of both operands
    p[0].ag1 = ag(R_TIDX, B0); p[0].ld1_dst = A2;
    p[0].ag2 = ag(R_IIDX, B5); p[0].ld2_dst = A3;
    p[1].ag1 = ag(R_TIDX, B1); p[1].ld1_dst = A4;
    p[1].ag2 = ag(R_IIDX, B6); p[1].ld2_dst = A5;
    p[2].ag1 = ag(R_TIDX, B2); p[2].ld1_dst = A7;
    p[2].ag2 = ag(R_IIDX, B7); p[2].ld2_dst = A8;
    p[3].ag1 = ag(R_TIDX, B3); p[3].ld1_dst = A10;
    p[3].ag2 = ag(R_IIDX, B8); p[3].ld2_dst = A11;
    p[4].ag1 = ag(R_TIDX, B4); p[4].ld1_dst = A12;
    p[4].ag2 = ag(R_IIDX, B9); p[4].ld2_dst = A13;
    // scales: d0 (PE1), d1 (PE2), d = d0*d1 (PE3)
    p[1].a1_op = A1_PASS; p[1].src_a = A2; p[1].a2_op = A2_CVTL; p[1].wr = 1; p[1].dst = A6;
    p[2].a1_op = A1_PASS; p[2].src_a = A3; p[2].a2_op = A2_CVTL; p[2].wr = 1; p[2].dst = A9;
    p[3].a1_op = A1_FML2; p[3].src_a = A6; p[3].src_b = A9; p[3].wr = 1; p[3].dst = A6;
    // word 0 (A4, A5) -> A14; word 1 (A7, A8) -> B10; word 2 (A10, A11) -> A2;
    // word 3 (A12, A13) -> B12
    k = 4;
    p[k++] = merge_ld(p[4], op(A1_SML8, A4, A5, A0, 0, A2_PASS, A3_PASS, 0, A14));
    p[k++] = op(A1_PASS, A4, A0, A0, 0, A2_PASS, A3_SRL, 32, A4);
    p[k++] = op(A1_PASS, A5, A0, A0, 0, A2_PASS, A3_SRL, 32, A5);
    p[k++] = op(A1_SML8, A4, A5, A0, 0, A2_PASS, A3_PASS, 0, A15);
    p[k++] = op(A1_AD32, A14, A15, A0, 0, A2_PASS, A3_PASS, 0, A14);
    p[k++] = op(A1_SML8, A7, A8, A0, 0, A2_PASS, A3_PASS, 0, B10);
    p[k++] = op(A1_PASS, A7, A0, A0, 0, A2_PASS, A3_SRL, 32, A7);
    p[k++] = op(A1_PASS, A8, A0, A0, 0, A2_PASS, A3_SRL, 32, A8);
    p[k++] = op(A1_SML8, A7, A8, A0, 0, A2_PASS, A3_PASS, 0, B11);
    p[k++] = op(A1_AD32, B10, B11, A0, 0, A2_PASS, A3_PASS, 0, B10);
    p[k++] = op(A1_SML8, A10, A11, A0, 0, A2_PASS, A3_PASS, 0, A2);
    p[k++] = op(A1_PASS, A10, A0, A0, 0, A2_PASS, A3_SRL, 32, A10);
    p[k++] = op(A1_PASS, A11, A0, A0, 0, A2_PASS, A3_SRL, 32, A11);
    p[k++] = op(A1_SML8, A10, A11, A0, 0, A2_PASS, A3_PASS, 0, A3);
    p[k++] = op(A1_AD32, A2, A3, A0, 0, A2_PASS, A3_PASS, 0, A2);
    p[k++] = op(A1_SML8, A12, A13, A0, 0, A2_PASS, A3_PASS, 0, B12);
    p[k++] = op(A1_PASS, A12, A0, A0, 0, A2_PASS, A3_SRL, 32, A12);
    p[k++] = op(A1_PASS, A13, A0, A0, 0, A2_PASS, A3_SRL, 32, A13);
    p[k++] = op(A1_SML8, A12, A13, A0, 0, A2_PASS, A3_PASS, 0, A9);
    p[k++] = op(A1_AD32, B12, A9, A0, 0, A2_PASS, A3_PASS, 0, B12);
    // add the four words, then the two lanes
    p[k++] = op(A1_AD32, A14, B10, A0, 0, A2_PASS, A3_PASS, 0, A14);
    p[k++] = op(A1_AD32, A2, B12, A0, 0, A2_PASS, A3_PASS, 0, A2);
    p[k++] = op(A1_AD32, A14, A2, A0, 0, A2_PASS, A3_PASS, 0, A14);
    p[k++] = op(A1_PASS, A14, A0, A0, 0, A2_PASS, A3_ROL, 32, A15);
    p[k++] = op(A1_AD32, A14, A15, A0, 0, A2_I2F, A3_PASS, 0, A14);  // lanes summed, to FP32
    p[k++] = op(A1_FMA2, A14, A6, A0, 1, A2_PASS, A3_PASS, 0, A15);  // acc += sum * d
    p[k] = op(A1_PASS, A15, A0, A0, 0, A2_PASS, A3_PASS, 0, A15);
    p[k].ag2 = ag(A1, R_THREAD); p[k].st = 1'b1; p[k].st_last = 1'b1;
    return p;
  endfunction

  // keep the loads of the first configuration, take the ALU part of the second
  function automatic pe_cfg_t merge_ld(input pe_cfg_t ld, input pe_cfg_t alu);
    pe_cfg_t c;
    c = alu;
    c.ag1 = ld.ag1; c.ld1_dst = ld.ld1_dst;
    c.ag2 = ld.ag2; c.ld2_dst = ld.ld2_dst;
    return c;
  endfunction

  // B0..B4 = S0..S0+4, B5..B9 = S1..S1+4, A0 = 0, A1 = OUT
  function automatic regs_t q8_regv(input int s0, input int s1, input int out);
    regs_t r;
    r = '0;
    for (int k = 0; k < 5; k++) begin
      r[B0 + 5'(k)] = 64'(s0 + k);
      r[B5 + 5'(k)] = 64'(s1 + k);
    end
    r[A1] = 64'(out);
    return r;
  endfunction

  // reference: per block, exact integer dot, d0*d1 in FP32, fused acc
  function automatic logic [31:0] q8_ref(input logic [15:0] d0 [], input logic [15:0] d1 [],
                                         input logic [7:0] q0 [], input logic [7:0] q1 [],
                                         input int nblk);
    logic [31:0] acc, d, sf;
    int s;
    acc = 32'd0;
    for (int b = 0; b < nblk; b++) begin
      s = 0;
      for (int i = 0; i < 32; i++) s += int'($signed(q0[32*b + i])) * int'($signed(q1[32*b + i]));
      d = r2f(f2r(h2f_bits(d0[b])) * f2r(h2f_bits(d1[b])));
      sf = r2f(real'(s));
      acc = r2f(f2r(sf) * f2r(d) + f2r(acc));
    end
    return acc;
  endfunction

endpackage
