// tb_lmm: checks the double-buffered LMM against a two-bank reference model:
// DMA writes land in the bank the PE does not own, PE reads and stores use
// the PE bank, a swap exchanges them, and read data appears exactly one
// cycle after the address. DMA traffic runs in the same cycles as PE reads.
module tb_lmm;
  import imax_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 0, rst_n = 0;
  logic swap, pe_bank;
  logic p1_re, p2_re, p2_we, d_re, d_we;
  logic [AW-1:0] p1_addr, p2_addr, d_addr;
  word_t p1_rdata, p2_rdata, p2_wdata, d_rdata, d_wdata;
  int checks = 0, failures = 0;
  word_t ref_m [2][DEPTH];
  logic ref_bank;

  lmm #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp1v, exp2v, expdv;
    word_t exp1, exp2, expd;
    swap = 0; p1_re = 0; p2_re = 0; p2_we = 0; d_re = 0; d_we = 0;
    p1_addr = 0; p2_addr = 0; d_addr = 0; p2_wdata = 0; d_wdata = 0;
    ref_bank = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fill both banks through the DMA port, swapping in between
    for (int bk = 0; bk < 2; bk++) begin
      for (int i = 0; i < DEPTH; i++) begin
        d_we = 1; d_addr = AW'(i); d_wdata = {$urandom, $urandom};
        ref_m[~ref_bank][i] = d_wdata;
        @(posedge clk); #1;
      end
      d_we = 0;
      swap = 1; ref_bank = ~ref_bank; @(posedge clk); #1; swap = 0;
    end
    exp1v = 0; exp2v = 0; expdv = 0;
    for (int i = 0; i < 20000; i++) begin
      // drive random traffic on all ports
      p1_re = $urandom % 2; p1_addr = AW'($urandom % DEPTH);
      p2_re = 0; p2_we = 0;
      if ($urandom % 2) p2_re = 1; else p2_we = ($urandom % 3 == 0);
      p2_addr = AW'($urandom % DEPTH); p2_wdata = {$urandom, $urandom};
      d_re = $urandom % 2; d_we = !d_re && ($urandom % 2);
      d_addr = AW'($urandom % DEPTH); d_wdata = {$urandom, $urandom};
      swap = ($urandom % 50 == 0);
      if (p1_re) exp1 = ref_m[ref_bank][p1_addr];
      if (p2_re) exp2 = ref_m[ref_bank][p2_addr];
      if (d_re)  expd = ref_m[~ref_bank][d_addr];
      exp1v = p1_re; exp2v = p2_re; expdv = d_re;
      if (p2_we) ref_m[ref_bank][p2_addr] = p2_wdata;
      if (d_we)  ref_m[~ref_bank][d_addr] = d_wdata;
      if (swap) ref_bank = ~ref_bank;
      @(posedge clk); #1;
      if (exp1v) begin checks++; if (p1_rdata !== exp1) failures++; end
      if (exp2v) begin checks++; if (p2_rdata !== exp2) failures++; end
      if (expdv) begin checks++; if (d_rdata !== expd) failures++; end
      checks++; if (pe_bank !== ref_bank) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
