// imax_pkg: types, opcodes and helper functions shared by the IMAX compute
// lane. The lane is a one-dimensional chain of processing elements (PEs),
// each paired with a double-buffered local memory module (LMM). A PE has two
// register groups (A and B, 16 x 64-bit registers each), three ALUs in series
// (ALU1 arithmetic, ALU2 bit manipulation, ALU3 shift/rotate) and two address
// generators. The group/register counts, the 64-bit datapath, 64 PEs per lane,
// four-way column multithreading and the 32 KB LMM follow the paper. The
// opcode set, the encodings and the configuration word layout are this
// design's own: the paper names the units and two added instructions
// (OP_SML8, OP_AD32) but gives no instruction encoding.
package imax_pkg;

  localparam int unsigned DW       = 64;   // datapath width
  localparam int unsigned NGRP     = 2;    // register groups A, B
  localparam int unsigned NREG     = 16;   // registers per group
  localparam int unsigned NTHR     = 4;    // column-multithreading depth
  localparam int unsigned ALU1_LAT = 4;    // ALU1/FPU latency (= NTHR)
  localparam int unsigned PE_LAT   = ALU1_LAT + 1; // stage-to-stage latency
  localparam int unsigned AW       = 16;   // LMM word address width
  localparam int unsigned PEW      = 8;    // PE index width in commands

  typedef logic [DW-1:0] word_t;
  // register select: {group, index}; group 0 = A, 1 = B
  typedef logic [4:0]    rsel_t;

  // Index registers written by the lane controller into the stage-0
  // register file on every EXEC token (group B).
  localparam rsel_t R_THREAD = 5'h1D;  // B13: thread number
  localparam rsel_t R_TIDX   = 5'h1E;  // B14: thread*TSTRIDE + iter*ISTRIDE
  localparam rsel_t R_IIDX   = 5'h1F;  // B15: iter*ISTRIDE

  typedef enum logic [3:0] {
    A1_PASS = 4'd0,  // a
    A1_ADD  = 4'd1,  // a + b (64-bit)
    A1_SUB  = 4'd2,  // a - b (64-bit)
    A1_MAC  = 4'd3,  // c + a[31:0]*b[31:0], signed, 64-bit
    A1_FMA2 = 4'd4,  // 2-way FP32: a*b + c per 32-bit half
    A1_FAD2 = 4'd5,  // 2-way FP32: a + c per 32-bit half
    A1_FML2 = 4'd6,  // 2-way FP32: a*b per 32-bit half
    A1_SML8 = 4'd7,  // 2-way: sext32(a8*b8 + a8*b8) per half, bytes 0..3
    A1_AD32 = 4'd8   // 2-way 32-bit integer add a + b
  } alu1_op_e;

  typedef enum logic [2:0] {
    A2_PASS  = 3'd0,
    A2_AND   = 3'd1,  // x & imm
    A2_OR    = 3'd2,  // x | imm
    A2_XOR   = 3'd3,  // x ^ imm
    A2_EXT   = 3'd4,  // (x >> pos) & ((1<<len)-1)
    A2_CVTL  = 3'd5,  // FP16 x[15:0],x[31:16]  -> FP32 lanes lo,hi
    A2_CVTH  = 3'd6,  // FP16 x[47:32],x[63:48] -> FP32 lanes lo,hi
    A2_I2F   = 3'd7   // 2-way signed int32 -> FP32
  } alu2_op_e;

  typedef enum logic [2:0] {
    A3_PASS = 3'd0,
    A3_SLL  = 3'd1,
    A3_SRL  = 3'd2,
    A3_SRA  = 3'd3,
    A3_ROL  = 3'd4,
    A3_ROR  = 3'd5
  } alu3_op_e;

  // Address generator configuration: addr = (ra & mask_a) + (rb & mask_b)
  typedef struct packed {
    logic          en;
    rsel_t         ra;
    rsel_t         rb;
    logic [AW-1:0] mask_a;
    logic [AW-1:0] mask_b;
  } ag_cfg_t;

  // Static configuration of one PE (written in the CONF phase).
  typedef struct packed {
    alu1_op_e      a1_op;
    rsel_t         src_a;
    rsel_t         src_b;
    rsel_t         src_c;
    logic          acc;       // UPDATE: c <- own ALU1 result of this thread
    alu2_op_e      a2_op;
    logic [31:0]   a2_imm;    // AND/OR/XOR immediate (zero-extended)
    logic [5:0]    a2_pos;
    logic [5:0]    a2_len;
    alu3_op_e      a3_op;
    logic [5:0]    a3_sh;
    logic          wr;        // write ALU result into next-stage register
    rsel_t         dst;
    ag_cfg_t       ag1;       // load address -> ld1_dst
    rsel_t         ld1_dst;
    ag_cfg_t       ag2;       // load or store address
    logic          st;        // AG2 stores ALU result instead of loading
    logic          st_last;   // store only on the last iteration
    rsel_t         ld2_dst;
  } pe_cfg_t;

  // Token that travels down the execution data path.
  typedef struct packed {
    logic        valid;
    logic [1:0]  thread;
    logic        first;       // first iteration of this thread
    logic        last;        // last iteration of this thread
  } tok_t;

  typedef logic [NGRP*NREG-1:0][DW-1:0] regs_t;  // A0..A15, B0..B15

  // Lane command, issued by the DMA channel.
  typedef enum logic [2:0] {
    C_CONF  = 3'd0,  // cfg -> PE pe
    C_REGV  = 3'd1,  // data -> stage-0 register addr[4:0]
    C_RANGE = 3'd2,  // data = {tstride[15:0], istride[15:0], niter[31:0]}
    C_LMMW  = 3'd3,  // data -> LMM (DMA bank) of PE pe at addr
    C_LMMR  = 3'd4,  // read LMM (DMA bank) of PE pe at addr
    C_SWAP  = 3'd5,  // exchange the PE bank and the DMA bank of every LMM
    C_EXEC  = 3'd6   // run the configured loop
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e        op;
    logic [PEW-1:0] pe;
    logic [AW-1:0]  addr;
    word_t          data;
    pe_cfg_t        cfg;
  } lane_cmd_t;

  // DMA descriptor, written by the host into a lane's DMA channel.
  typedef enum logic [1:0] {
    D_LOAD  = 2'd0,  // nwords from DMA buffer ddr_addr.. -> LMM of pe at lmm_addr..
    D_DRAIN = 2'd1,  // nwords from LMM of pe at lmm_addr.. -> DMA buffer ddr_addr..
    D_CMD   = 2'd2   // pass cmd to the lane (CONF, REGV, RANGE, SWAP, EXEC)
  } dma_kind_e;

  typedef struct packed {
    dma_kind_e      kind;
    logic [31:0]    ddr_addr;   // word address in the DMA buffer
    logic [PEW-1:0] pe;
    logic [AW-1:0]  lmm_addr;
    logic [15:0]    nwords;
    lane_cmd_t      cmd;
  } dma_desc_t;

  // ---------------------------------------------------------------
  // FP16 -> FP32, exact (FP16 subnormals become FP32 normals).
  function automatic logic [31:0] f16_to_f32(input logic [15:0] h);
    logic        s;
    logic [4:0]  e;
    logic [9:0]  m;
    logic [9:0]  mn;
    int          sh;
    s = h[15]; e = h[14:10]; m = h[9:0];
    if (e == 5'd0) begin
      if (m == 10'd0) return {s, 31'd0};
      // value = m * 2^-24; normalise so the leading one drops out
      sh = 0;
      for (int k = 0; k < 10; k++)
        if (m[k]) sh = 9 - k;
      mn = m << (sh + 1);
      return {s, 8'(127 - 15 - sh), mn, 13'd0};
    end else if (e == 5'h1F) begin
      return {s, 8'hFF, m, 13'd0};
    end
    return {s, 8'(32'(e) + 112), m, 13'd0};
  endfunction

  // signed int32 -> FP32, round to nearest even
  function automatic logic [31:0] i32_to_f32(input logic [31:0] v);
    logic        s;
    logic [31:0] a;
    int          p;
    logic [31:0] n;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] r;
    logic [7:0]  e;
    s = v[31];
    a = s ? (~v + 32'd1) : v;
    if (a == 32'd0) return 32'd0;
    p = 0;
    for (int k = 0; k < 32; k++)
      if (a[k]) p = k;
    n = a << (31 - p);            // leading one at bit 31
    m = n[31:8];
    g = n[7];
    st = |n[6:0];
    r = {1'b0, m} + {24'd0, g & (st | m[0])};
    e = 8'(127 + p);
    if (r[24]) begin
      r = r >> 1;
      e = e + 8'd1;
    end
    return {s, e, r[22:0]};
  endfunction

endpackage
