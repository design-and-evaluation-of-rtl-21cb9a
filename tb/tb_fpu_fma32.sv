// tb_fpu_fma32: checks the FP32 fused multiply-add against the simulator's
// double-precision arithmetic (the exact product a*b fits in a double, so
// a*b+c rounded once to double and then to single matches a single
// rounding except in vanishingly rare double-rounding cases), plus special
// values, and checks that every result arrives exactly LAT cycles after issue.
module tb_fpu_fma32;
  import tb_fp_pkg::*;
  localparam int LAT = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [31:0] a, b, c, r;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;

  fpu_fma32 #(.LAT(LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rnd_f(input int emin, input int emax);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(emin + ($urandom % (emax - emin + 1)));
    return v;
  endfunction

  function automatic logic [31:0] ref_fma(input logic [31:0] x, y, z);
    return r2f(f2r(x) * f2r(y) + f2r(z));
  endfunction

  logic [31:0] exp_q [$];
  int issue_cyc [$];

  task automatic issue(input logic [31:0] x, y, z, input logic [31:0] e);
    a = x; b = y; c = z; in_valid = 1'b1;
    exp_q.push_back(e);
    issue_cyc.push_back(cyc);
    @(posedge clk); #1;
  endtask

  // sample at the falling edge, away from the register updates
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      logic [31:0] e;
      int ic;
      e = exp_q.pop_front();
      ic = issue_cyc.pop_front();
      checks++;
      if (r !== e) begin
        failures++;
        if (failures < 10) $display("mismatch: got %h expected %h", r, e);
      end
      checks++;
      if (cyc - ic != LAT) begin
        failures++;
        $display("latency %0d, expected %0d", cyc - ic, LAT);
      end
    end
  end

  initial begin
    logic [31:0] x, y, z;
    in_valid = 0; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // special values
    issue(32'h3F80_0000, 32'h4000_0000, 32'h3F80_0000, 32'h4040_0000); // 1*2+1 = 3
    issue(32'h7F80_0000, 32'h0000_0000, 32'h3F80_0000, 32'h7FC0_0000); // inf*0
    issue(32'h7F80_0000, 32'h3F80_0000, 32'hFF80_0000, 32'h7FC0_0000); // inf-inf
    issue(32'h7F80_0000, 32'hBF80_0000, 32'h3F80_0000, 32'hFF80_0000); // -inf
    issue(32'h0000_0000, 32'h4000_0000, 32'hC040_0000, 32'hC040_0000); // 0*2-3
    issue(32'h3F80_0000, 32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000); // exact 0
    issue(32'h7F00_0000, 32'h7F00_0000, 32'h0000_0000, 32'h7F80_0000); // overflow
    issue(32'h0080_0000, 32'h3F00_0000, 32'h0000_0000, 32'h0000_0000); // flush
    issue(32'h7FC0_1234, 32'h3F80_0000, 32'h0000_0000, 32'h7FC0_0000); // NaN
    issue(32'h0000_0000, 32'h0000_0000, 32'h8000_0000, 32'h0000_0000); // +0*+0 + -0
    // random, normal range, including near-cancellation
    for (int i = 0; i < 4000; i++) begin
      x = rnd_f(110, 140); y = rnd_f(110, 140);
      if (i % 4 == 0) begin
        z = ref_fma(x, y, 32'd0);
        z[31] = ~z[31];
        z[3:0] = 4'($urandom);
      end else begin
        z = rnd_f(100, 160);
      end
      issue(x, y, z, ref_fma(x, y, z));
    end
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
