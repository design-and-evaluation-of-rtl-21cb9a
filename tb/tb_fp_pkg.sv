// tb_fp_pkg: reference floating-point helpers for the testbenches. They
// convert between IEEE single-precision bit patterns and the simulator's
// double-precision reals by working on the fields directly, so that the
// expected values do not depend on the design's own conversion logic.
package tb_fp_pkg;

  // float bits -> real, computed from the fields
function automatic real f2r(input logic [31:0] x);
  real m;
  if (x[30:23] == 8'd0) return 0.0;
  m = 1.0 + real'(x[22:0]) / 8388608.0;
  for (int k = 0; k < int'(x[30:23]) - 127; k++) m = m * 2.0;
  for (int k = 0; k < 127 - int'(x[30:23]); k++) m = m / 2.0;
  return x[31] ? -m : m;
endfunction

// real -> float bits, round to nearest even from the double's fields,
// flushing results below the normal range to zero
function automatic logic [31:0] r2f(input real v);
  logic [63:0] d;
  int e;
  logic [23:0] m;
  logic g, st;
  d = $realtobits(v);
  if (d[62:0] == 63'd0) return {d[63], 31'd0};
  e = int'(d[62:52]) - 1023 + 127;
  m = {1'b0, d[51:29]};
  g = d[28];
  st = |d[27:0];
  m = m + {23'd0, g & (st | m[0])};
  if (m[23]) e = e + 1;
  if (e >= 255) return {d[63], 8'hFF, 23'd0};
  if (e <= 0) return {d[63], 31'd0};
  return {d[63], 8'(e), m[22:0]};
endfunction


function automatic logic [31:0] h2f_bits(input logic [15:0] h);
  real m;
  int e;
  if (h[14:10] == 5'd0) begin
    m = real'(h[9:0]) / 16777216.0;  // m * 2^-24
  end else begin
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    for (int k = 0; k < e; k++) m = m * 2.0;
    for (int k = 0; k < -e; k++) m = m / 2.0;
  end
  return r2f(h[15] ? -m : m) | {h[15], 31'd0};
endfunction

endpackage
