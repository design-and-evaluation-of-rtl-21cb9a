// alu2: the bit-manipulation unit, second in each PE's ALU chain. It is
// combinational and works on ALU1's result. Besides AND/OR/XOR with a
// configuration immediate and bit-field extraction, it converts two FP16
// values to two FP32 values (the low or the high 32 bits of the word), which
// is how the FP16 kernel converts operands inline without a separate
// conversion unit, and it converts two signed 32-bit integers to FP32 for
// the Q8_0 kernel's partial sums. The paper gives ALU2's role (bitwise
// operations, bit-field extraction, inline FP16-to-FP32 conversion); the
// operation list and the integer-to-float operation are this design's.
// The FP16 conversion is exact; integer-to-float rounds to nearest even.
module alu2
  import imax_pkg::*;
(
  input  alu2_op_e    op,
  input  word_t       x,
  input  logic [31:0] imm,
  input  logic [5:0]  pos,
  input  logic [5:0]  len,
  output word_t       y
);
  word_t fmask;

  always_comb begin
    fmask = (len == 6'd0) ? '1 : ((word_t'(1) << len) - word_t'(1));
    unique case (op)
      A2_AND:  y = x & word_t'(imm);
      A2_OR:   y = x | word_t'(imm);
      A2_XOR:  y = x ^ word_t'(imm);
      A2_EXT:  y = (x >> pos) & fmask;
      A2_CVTL: y = {f16_to_f32(x[31:16]), f16_to_f32(x[15:0])};
      A2_CVTH: y = {f16_to_f32(x[63:48]), f16_to_f32(x[47:32])};
      A2_I2F:  y = {i32_to_f32(x[63:32]), i32_to_f32(x[31:0])};
      default: y = x;
    endcase
  end
endmodule
