// addr_gen: one of a PE's two address generators. Each of its two register
// operands passes through its own mask and the masked values are added into
// an LMM word address, in parallel with the ALUs so that address arithmetic
// costs no ALU cycle. The two masked inputs follow the paper's PE figure;
// the add of the two masked operands and the address width are this
// design's choices (the paper does not give the AG's arithmetic).
// Combinational.
// Standing lint warning: only the low AW bits of ra and rb are used, since
// LMM addresses are AW bits wide; the upper register bits are unused.
module addr_gen
  import imax_pkg::*;
(
  input  word_t         ra,
  input  word_t         rb,
  input  logic [AW-1:0] mask_a,
  input  logic [AW-1:0] mask_b,
  output logic [AW-1:0] addr
);
  assign addr = (ra[AW-1:0] & mask_a) + (rb[AW-1:0] & mask_b);
endmodule
