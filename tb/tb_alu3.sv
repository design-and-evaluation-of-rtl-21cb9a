// tb_alu3: checks every shift and rotate of ALU3 for random words and all
// shift amounts against a bit-by-bit reference.
module tb_alu3;
  import imax_pkg::*;
  alu3_op_e op;
  word_t x, y;
  logic [5:0] sh;
  int checks = 0, failures = 0;

  alu3 dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t model(input alu3_op_e o, input word_t v, input int s);
    word_t r;
    for (int k = 0; k < 64; k++) begin
      case (o)
        A3_SLL: r[k] = (k - s >= 0) ? v[k - s] : 1'b0;
        A3_SRL: r[k] = (k + s < 64) ? v[k + s] : 1'b0;
        A3_SRA: r[k] = (k + s < 64) ? v[k + s] : v[63];
        A3_ROL: r[k] = v[(k - s + 64) % 64];
        A3_ROR: r[k] = v[(k + s) % 64];
        default: r[k] = v[k];
      endcase
    end
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 200; i++) begin
      x = {$urandom, $urandom};
      for (int s = 0; s < 64; s++) begin
        sh = 6'(s);
        for (int o = 0; o < 6; o++) begin
          op = alu3_op_e'(o);
          #1;
          checks++;
          if (y !== model(op, x, s)) begin
            failures++;
            if (failures < 10) $display("op %0d sh %0d: got %h", o, s, y);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
