// tb_addr_gen: checks the address generator's masked sum for random
// operands and masks, including all-ones and zero masks.
module tb_addr_gen;
  import imax_pkg::*;
  word_t ra, rb;
  logic [AW-1:0] mask_a, mask_b, addr;
  int checks = 0, failures = 0;

  addr_gen dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      int unsigned e;
      ra = {$urandom, $urandom}; rb = {$urandom, $urandom};
      case (i % 4)
        0: begin mask_a = '1; mask_b = '1; end
        1: begin mask_a = '1; mask_b = '0; end
        default: begin mask_a = AW'($urandom); mask_b = AW'($urandom); end
      endcase
      e = (int'(ra[AW-1:0] & mask_a) + int'(rb[AW-1:0] & mask_b)) % (1 << AW);
      #1;
      checks++;
      if (int'(addr) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
