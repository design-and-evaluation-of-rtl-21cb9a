// imax_pe: one unit of the linear array, a processing element with its LMM.
// Every cycle the PE takes a token and a register file (groups A and B, 16
// 64-bit registers each, written by the upstream PE) and, PE_LAT = 5 cycles
// later, hands a token and a register file to the downstream PE. Meanwhile:
//  * ALU1 reads three registers (a, b, c) and its 4-cycle result goes
//    through ALU2 and ALU3 (combinational) to give the PE result; with
//    UPDATE (cfg.acc) set, c is replaced after a thread's first iteration by
//    ALU1's own result of the same thread, which returns exactly when that
//    thread issues again because four threads issue in rotation;
//  * AG1 forms a load address from two masked registers, AG2 a load or a
//    store address; loads are single-cycle LMM reads; a store writes the PE
//    result into the LMM (optionally only on a thread's last iteration);
//  * the outgoing register file is the incoming one, delayed, with the
//    loaded words and the PE result written into their destination
//    registers (results are available to the next PE, never to this one).
// The composition (two register groups of 16, ALU1 -> ALU2 -> ALU3, two
// AGs with masks, double-buffered LMM, results passed to the downstream
// neighbour only) follows the paper's PE figure and text. The uniform
// 5-cycle stage latency, the pass-through of untouched registers, the
// configuration fields and the store path are this design's choices.
// Standing lint warning: rst_n is also used, synchronously, to gate the
// assertions; the logic itself resets asynchronously.
module imax_pe
  import imax_pkg::*;
#(
  parameter int unsigned LMM_DEPTH = 4096
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pe_cfg_t       cfg,
  input  tok_t          in_tok,
  input  regs_t         in_regs,
  output tok_t          out_tok,
  output regs_t         out_regs,
  // LMM bank control and DMA port
  input  logic          swap,
  output logic          pe_bank,
  input  logic          d_re,
  input  logic          d_we,
  input  logic [AW-1:0] d_addr,
  input  word_t         d_wdata,
  output word_t         d_rdata
);
  localparam int unsigned D = ALU1_LAT;

  // ---------------- operand fetch
  word_t opa, opb, opc, acc_c;
  word_t a1_y, a2_y, a3_y;
  logic  a1_v;
  // register reads and writes are written as explicit per-register selects
  // (rather than variable indexing) so that synthesis builds plain muxes
  function automatic word_t rsel(input regs_t r, input rsel_t s);
    word_t v = '0;
    for (int i = 0; i < NGRP * NREG; i++) if (s == 5'(i)) v = r[i];
    return v;
  endfunction

  assign opa = rsel(in_regs, cfg.src_a);
  assign opb = rsel(in_regs, cfg.src_b);
  assign opc = rsel(in_regs, cfg.src_c);
  assign acc_c = (cfg.acc && !in_tok.first) ? a1_y : opc;

  alu1 u_alu1 (
    .clk, .rst_n,
    .in_valid (in_tok.valid),
    .op (cfg.a1_op),
    .a (opa), .b (opb), .c (acc_c),
    .out_valid (a1_v),
    .y (a1_y)
  );

  alu2 u_alu2 (.op (cfg.a2_op), .x (a1_y), .imm (cfg.a2_imm), .pos (cfg.a2_pos),
               .len (cfg.a2_len), .y (a2_y));
  alu3 u_alu3 (.op (cfg.a3_op), .x (a2_y), .sh (cfg.a3_sh), .y (a3_y));

  // ---------------- token and register delay line (aligned with ALU1)
  tok_t  tok_d  [D];
  regs_t regs_d [D];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) begin
        tok_d[i]  <= '0;
        regs_d[i] <= '0;
      end
    end else begin
      tok_d[0]  <= in_tok;
      regs_d[0] <= in_regs;
      for (int i = 1; i < D; i++) begin
        tok_d[i]  <= tok_d[i-1];
        regs_d[i] <= regs_d[i-1];
      end
    end
  end
  tok_t  tok4;
  regs_t regs4;
  assign tok4  = tok_d[D-1];
  assign regs4 = regs_d[D-1];

  // ---------------- address generators and LMM
  logic [AW-1:0] ag1_addr, ag2_addr;
  word_t ag2_ra, ag2_rb;
  logic  ld1, ld2, st;
  word_t p1_rdata, p2_rdata;

  addr_gen u_ag1 (.ra (rsel(in_regs, cfg.ag1.ra)), .rb (rsel(in_regs, cfg.ag1.rb)),
                  .mask_a (cfg.ag1.mask_a), .mask_b (cfg.ag1.mask_b), .addr (ag1_addr));
  // a store address is formed when the result is ready, from the delayed registers
  assign ag2_ra = cfg.st ? rsel(regs4, cfg.ag2.ra) : rsel(in_regs, cfg.ag2.ra);
  assign ag2_rb = cfg.st ? rsel(regs4, cfg.ag2.rb) : rsel(in_regs, cfg.ag2.rb);
  addr_gen u_ag2 (.ra (ag2_ra), .rb (ag2_rb),
                  .mask_a (cfg.ag2.mask_a), .mask_b (cfg.ag2.mask_b), .addr (ag2_addr));

  assign ld1 = in_tok.valid && cfg.ag1.en;
  assign ld2 = in_tok.valid && cfg.ag2.en && !cfg.st;
  assign st  = tok4.valid && cfg.ag2.en && cfg.st && (!cfg.st_last || tok4.last);

  lmm #(.DEPTH(LMM_DEPTH)) u_lmm (
    .clk, .rst_n, .swap, .pe_bank,
    .p1_re (ld1), .p1_addr (ag1_addr), .p1_rdata,
    .p2_re (ld2), .p2_we (st), .p2_addr (ag2_addr), .p2_wdata (a3_y), .p2_rdata,
    .d_re, .d_we, .d_addr, .d_wdata, .d_rdata
  );

  // loaded words arrive one cycle after the address; delay them to cycle D
  word_t ld1_d [D-1];
  word_t ld2_d [D-1];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D - 1; i++) begin
        ld1_d[i] <= '0;
        ld2_d[i] <= '0;
      end
    end else begin
      ld1_d[0] <= p1_rdata;
      ld2_d[0] <= p2_rdata;
      for (int i = 1; i < D - 1; i++) begin
        ld1_d[i] <= ld1_d[i-1];
        ld2_d[i] <= ld2_d[i-1];
      end
    end
  end

  // ---------------- output register file
  regs_t nxt;
  always_comb begin
    nxt = regs4;
    for (int i = 0; i < NGRP * NREG; i++) begin
      if (cfg.ag1.en && cfg.ld1_dst == 5'(i)) nxt[i] = ld1_d[D-2];
      if (cfg.ag2.en && !cfg.st && cfg.ld2_dst == 5'(i)) nxt[i] = ld2_d[D-2];
      if (cfg.wr && cfg.dst == 5'(i)) nxt[i] = a3_y;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_tok  <= '0;
      out_regs <= '0;
    end else begin
      out_tok  <= tok4;
      out_regs <= nxt;
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (a1_v == tok4.valid) else $error("imax_pe: ALU1 out of step");

endmodule
