// alu1: the arithmetic unit at the head of each PE's ALU chain. It works on
// the 64-bit datapath and has a fixed latency of ALU1_LAT (4) cycles for
// every operation, so that results of the four interleaved threads come back
// in issue order. Integer operations (64-bit add/sub, a signed 32x32
// multiply-accumulate, the 2-way SIMD OP_SML8 and OP_AD32 added for the Q8_0
// kernel) are computed in one cycle and delayed; the 2-way SIMD FP32
// operations use two pipelined fpu_fma32 units, one per 32-bit half, which
// is how two FP32 FMAs share the 64-bit ALU1 datapath.
// OP_SML8 follows the Q8_0 unit of the paper's figure: the four low bytes of
// a and b are multiplied pairwise as signed 8-bit values; bytes 0,1 are
// summed into the low 32-bit result and bytes 2,3 into the high one, each
// sign-extended to 32 bits. OP_AD32 adds the two 32-bit halves separately.
// Which bytes OP_SML8 reads, and the rest of the opcode set, are this
// design's choices.
// Interface: in_valid/op/a/b/c in; out_valid/y ALU1_LAT cycles later.
// Standing lint warning: rst_n is also used, synchronously, to gate the
// assertion; the logic itself resets asynchronously.
module alu1
  import imax_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  alu1_op_e op,
  input  word_t    a,
  input  word_t    b,
  input  word_t    c,
  output logic     out_valid,
  output word_t    y
);

  localparam logic [31:0] F_ONE = 32'h3F80_0000;

  logic  is_fp;
  word_t int_res;
  logic [31:0] fa [2], fb [2], fc [2], fr [2];
  logic        fv [2];

  function automatic logic [31:0] sml8_half(input logic [15:0] x, input logic [15:0] z);
    logic signed [15:0] p0, p1;
    logic signed [31:0] s;
    p0 = $signed(x[7:0])  * $signed(z[7:0]);
    p1 = $signed(x[15:8]) * $signed(z[15:8]);
    s  = 32'(p0) + 32'(p1);
    return s;
  endfunction

  always_comb begin
    is_fp = (op == A1_FMA2) || (op == A1_FAD2) || (op == A1_FML2);
    unique case (op)
      A1_ADD:  int_res = a + b;
      A1_SUB:  int_res = a - b;
      A1_MAC:  int_res = c + word_t'($signed(a[31:0]) * $signed(b[31:0]));
      A1_SML8: int_res = {sml8_half(a[31:16], b[31:16]), sml8_half(a[15:0], b[15:0])};
      A1_AD32: int_res = {a[63:32] + b[63:32], a[31:0] + b[31:0]};
      default: int_res = a;
    endcase
    for (int h = 0; h < 2; h++) begin
      fa[h] = a[32*h +: 32];
      fb[h] = (op == A1_FAD2) ? F_ONE : b[32*h +: 32];
      fc[h] = (op == A1_FML2) ? 32'd0 : c[32*h +: 32];
    end
  end

  for (genvar h = 0; h < 2; h++) begin : g_fpu
    fpu_fma32 #(.LAT(ALU1_LAT)) u_fma (
      .clk, .rst_n,
      .in_valid (in_valid && is_fp),
      .a (fa[h]), .b (fb[h]), .c (fc[h]),
      .out_valid (fv[h]),
      .r (fr[h])
    );
  end

  // integer results travel through a delay line of the same depth
  word_t ipipe [ALU1_LAT];
  logic  vpipe [ALU1_LAT];
  logic  fpipe [ALU1_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ALU1_LAT; i++) begin
        ipipe[i] <= '0;
        vpipe[i] <= 1'b0;
        fpipe[i] <= 1'b0;
      end
    end else begin
      ipipe[0] <= int_res;
      vpipe[0] <= in_valid;
      fpipe[0] <= is_fp;
      for (int i = 1; i < ALU1_LAT; i++) begin
        ipipe[i] <= ipipe[i-1];
        vpipe[i] <= vpipe[i-1];
        fpipe[i] <= fpipe[i-1];
      end
    end
  end

  assign out_valid = vpipe[ALU1_LAT-1];
  assign y = fpipe[ALU1_LAT-1] ? {fr[1], fr[0]} : ipipe[ALU1_LAT-1];

  // the FP units and the delay line stay in step
  always_ff @(posedge clk)
    if (rst_n && fpipe[ALU1_LAT-1] && vpipe[ALU1_LAT-1])
      assert (fv[0] && fv[1]) else $error("alu1: FP result missing");

endmodule
