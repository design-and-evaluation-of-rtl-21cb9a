// tb_alu2: checks every ALU2 operation against reference values: FP16 to
// FP32 conversion over all 65536 FP16 codes (finite ones through real
// arithmetic, inf/NaN by their fields), integer to FP32 through real
// arithmetic, and the logic and bit-field operations directly.
module tb_alu2;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  alu2_op_e op;
  word_t x, y;
  logic [31:0] imm;
  logic [5:0] pos, len;
  int checks = 0, failures = 0;

  alu2 dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input word_t e);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("op %0d x %h: got %h exp %h", op, x, y, e);
    end
  endtask

  function automatic logic [31:0] h2f(input logic [15:0] h);
    if (h[14:10] == 5'h1F) return {h[15], 8'hFF, h[9:0], 13'd0};
    return h2f_bits(h);
  endfunction

  initial begin
    imm = 0; pos = 0; len = 0;
    for (int h = 0; h < 65536; h += 2) begin
      x = {$urandom, 16'(h + 1), 16'(h)};
      op = A2_CVTL; chk({h2f(16'(h + 1)), h2f(16'(h))});
      x = {16'(h), 16'(h + 1), 32'($urandom)};
      op = A2_CVTH; chk({h2f(16'(h)), h2f(16'(h + 1))});
    end
    for (int i = 0; i < 2000; i++) begin
      logic signed [31:0] v0, v1;
      v0 = $urandom; v1 = $urandom;
      if (i % 2 == 0) begin v0 = v0 >>> ($urandom % 31); v1 = v1 >>> ($urandom % 31); end
      x = {v1, v0};
      op = A2_I2F; chk({r2f(real'(v1)), r2f(real'(v0))});
      x = {$urandom, $urandom}; imm = $urandom;
      op = A2_AND; chk(x & {32'd0, imm});
      op = A2_OR;  chk(x | {32'd0, imm});
      op = A2_XOR; chk(x ^ {32'd0, imm});
      op = A2_PASS; chk(x);
      pos = 6'($urandom); len = 6'(1 + $urandom % 32);
      op = A2_EXT;
      begin
        word_t e;
        e = '0;
        for (int k = 0; k < 64; k++)
          if (k < len && pos + k < 64) e[k] = x[pos + k];
        chk(e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
