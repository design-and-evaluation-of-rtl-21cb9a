// fpu_fma32: single-precision fused multiply-add r = a*b + c with one
// rounding (round to nearest, ties to even). This is the physical FPU that
// the column-multithreading scheme shares between four logical threads: a
// new operation is accepted every cycle and its result appears LAT cycles
// later, so when four threads issue in turn each thread sees its previous
// result again exactly when it issues next (LAT = 4 = number of threads).
// The paper states the time multiplexing and that it hides the FPU pipeline
// latency; the depth of 4, the single rounding and the number handling are
// this design's choices: subnormal inputs and results are flushed to zero,
// any NaN input or invalid operation gives the quiet NaN 0x7FC00000.
// The arithmetic is computed in one combinational block and followed by LAT
// register stages, which a synthesis tool can retime.
// Interface: in_valid/a/b/c in; out_valid/r LAT cycles later. No stall.
module fpu_fma32 #(
  parameter int unsigned LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic        out_valid,
  output logic [31:0] r
);

  localparam logic [31:0] QNAN = 32'h7FC0_0000;
  // aligned field: 48-bit product mantissa, 3 guard bits, 1 carry bit
  localparam int W = 52;

  function automatic logic [31:0] fma(input logic [31:0] x, input logic [31:0] y,
                                      input logic [31:0] z);
    logic sx, sy, sz, sp;
    logic [7:0] ex, ey, ez;
    logic [23:0] mx, my, mz;
    logic xz, yz, zz, xi, yi, zi, xn, yn, zn;
    logic [47:0] mp;
    int ep, ezi, emax, d, lead, er;
    logic [W-1:0] P, C, S, sm, n;
    logic sticky, g, rs, ss, big_p;
    logic [24:0] mr;
    sx = x[31]; sy = y[31]; sz = z[31];
    ex = x[30:23]; ey = y[30:23]; ez = z[30:23];
    xz = (ex == 8'd0); yz = (ey == 8'd0); zz = (ez == 8'd0);
    xi = (ex == 8'hFF) && (x[22:0] == 0); yi = (ey == 8'hFF) && (y[22:0] == 0);
    zi = (ez == 8'hFF) && (z[22:0] == 0);
    xn = (ex == 8'hFF) && (x[22:0] != 0); yn = (ey == 8'hFF) && (y[22:0] != 0);
    zn = (ez == 8'hFF) && (z[22:0] != 0);
    sp = sx ^ sy;
    if (xn || yn || zn) return QNAN;
    if ((xi && yz) || (yi && xz)) return QNAN;          // inf * 0
    if (xi || yi) begin
      if (zi && (sz != sp)) return QNAN;                // inf - inf
      return {sp, 8'hFF, 23'd0};
    end
    if (zi) return z;
    if (xz || yz) begin                                 // product is zero
      if (zz) return {sp & sz, 31'd0};
      return z;
    end
    mx = {1'b1, x[22:0]}; my = {1'b1, y[22:0]};
    mp = mx * my;                                       // in [2^46, 2^48)
    ep = int'(ex) + int'(ey) - 127;                     // exponent of 2^46 weight
    P = {1'b0, mp, 3'b000};
    if (zz) begin
      C = '0; ezi = -1000;
    end else begin
      mz = {1'b1, z[22:0]};
      C = {2'b00, mz, 23'd0, 3'b000};
      ezi = int'(ez);
    end
    // align the smaller operand to the larger exponent, keeping a sticky bit
    big_p = (ep >= ezi);
    emax = big_p ? ep : ezi;
    d = big_p ? (ep - ezi) : (ezi - ep);
    sm = big_p ? C : P;
    if (d >= W) begin
      sticky = (sm != '0);
      sm = '0;
    end else begin
      sticky = 1'b0;
      for (int k = 0; k < W; k++)
        if (k < d && sm[k]) sticky = 1'b1;
      sm = sm >> d;
    end
    sm[0] = sm[0] | sticky;
    if (big_p) C = sm; else P = sm;
    if (sp == sz) begin
      S = P + C; ss = sp;
    end else if (P >= C) begin
      S = P - C; ss = sp;
    end else begin
      S = C - P; ss = sz;
    end
    if (S == '0) return 32'd0;                          // exact cancellation: +0
    lead = 0;
    for (int k = 0; k < W; k++)
      if (S[k]) lead = k;
    er = emax + (lead - 49);
    // put the leading one at bit W-1
    n = S << (W - 1 - lead);
    mr = {1'b0, n[W-1 -: 24]};
    g  = n[W-25];
    rs = |n[W-26:0];
    mr = mr + {24'd0, g & (rs | mr[0])};
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255) return {ss, 8'hFF, 23'd0};
    if (er <= 0)   return {ss, 31'd0};
    return {ss, 8'(er), mr[22:0]};
  endfunction

  logic [31:0] res;
  always_comb res = fma(a, b, c);

  logic [31:0] pipe_r [LAT];
  logic        pipe_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        pipe_v[i] <= 1'b0;
        pipe_r[i] <= '0;
      end
    end else begin
      pipe_v[0] <= in_valid;
      pipe_r[0] <= res;
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_r[i] <= pipe_r[i-1];
      end
    end
  end

  assign out_valid = pipe_v[LAT-1];
  assign r         = pipe_r[LAT-1];

endmodule
