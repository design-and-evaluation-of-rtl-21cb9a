// alu3: the shift unit, last in each PE's ALU chain: 64-bit barrel shifts
// (logical left/right, arithmetic right) and rotates by a configured amount.
// Rotating by 32 swaps the two 32-bit SIMD halves, which the kernels use to
// fold the two FP32 lanes into one sum. Combinational. The paper gives the
// unit's role (barrel shift and rotate, used for dequantization); the
// operation encoding is this design's.
module alu3
  import imax_pkg::*;
(
  input  alu3_op_e   op,
  input  word_t      x,
  input  logic [5:0] sh,
  output word_t      y
);
  always_comb begin
    unique case (op)
      A3_SLL:  y = x << sh;
      A3_SRL:  y = x >> sh;
      A3_SRA:  y = word_t'($signed(x) >>> sh);
      A3_ROL:  y = (x << sh) | ((sh == 6'd0) ? '0 : (x >> (7'd64 - {1'b0, sh})));
      A3_ROR:  y = (x >> sh) | ((sh == 6'd0) ? '0 : (x << (7'd64 - {1'b0, sh})));
      default: y = x;
    endcase
  end
endmodule
