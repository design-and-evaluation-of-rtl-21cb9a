// tb_alu1: drives random operations of every ALU1 opcode, one per cycle, and
// compares each result, ALU1_LAT cycles later, with a reference computed in
// the testbench (integer arithmetic directly, FP32 through real arithmetic).
module tb_alu1;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  alu1_op_e op;
  word_t a, b, c, y;
  logic out_valid;
  int checks = 0, failures = 0, cyc = 0;

  alu1 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rf(input int lo, input int hi);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(lo + ($urandom % (hi - lo + 1)));
    return v;
  endfunction

  function automatic logic signed [31:0] s8x2(input logic [15:0] x, z);
    return 32'($signed(x[7:0])) * 32'($signed(z[7:0]))
         + 32'($signed(x[15:8])) * 32'($signed(z[15:8]));
  endfunction

  function automatic word_t model(input alu1_op_e o, input word_t x, z, w);
    word_t r;
    logic signed [63:0] p;
    case (o)
      A1_ADD:  r = x + z;
      A1_SUB:  r = x - z;
      A1_MAC:  begin p = 64'($signed(x[31:0])) * 64'($signed(z[31:0])); r = w + p; end
      A1_SML8: r = {s8x2(x[31:16], z[31:16]), s8x2(x[15:0], z[15:0])};
      A1_AD32: r = {x[63:32] + z[63:32], x[31:0] + z[31:0]};
      A1_FMA2: for (int h = 0; h < 2; h++)
                 r[32*h +: 32] = r2f(f2r(x[32*h +: 32]) * f2r(z[32*h +: 32]) + f2r(w[32*h +: 32]));
      A1_FAD2: for (int h = 0; h < 2; h++)
                 r[32*h +: 32] = r2f(f2r(x[32*h +: 32]) + f2r(w[32*h +: 32]));
      A1_FML2: for (int h = 0; h < 2; h++)
                 r[32*h +: 32] = r2f(f2r(x[32*h +: 32]) * f2r(z[32*h +: 32]));
      default: r = x;
    endcase
    return r;
  endfunction

  word_t exp_q [$];
  int    cyc_q [$];
  int    seen [9];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      word_t e;
      int ic;
      e = exp_q.pop_front();
      ic = cyc_q.pop_front();
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 10) $display("mismatch got %h exp %h", y, e);
      end
      checks++;
      if (cyc - ic != ALU1_LAT) failures++;
    end
  end

  initial begin
    in_valid = 0; op = A1_PASS; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      op = alu1_op_e'($urandom % 9);
      seen[op]++;
      if (op inside {A1_FMA2, A1_FAD2, A1_FML2}) begin
        a = {rf(110, 140), rf(110, 140)};
        b = {rf(110, 140), rf(110, 140)};
        c = {rf(100, 150), rf(100, 150)};
      end else begin
        a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      end
      in_valid = 1;
      exp_q.push_back(model(op, a, b, c));
      cyc_q.push_back(cyc);
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (ALU1_LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    for (int k = 0; k < 9; k++) begin
      checks++;
      if (seen[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
