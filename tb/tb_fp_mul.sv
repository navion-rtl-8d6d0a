// tb_fp_mul: self-checking test of fp_mul. Random doubles over a wide exponent
// range are multiplied; each result must equal,
// bit for bit, the simulator's own IEEE double arithmetic (round to nearest-even).
// Also checks the one-cycle latency.
module tb_fp_mul;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [63:0] a = 0, b = 0, y;
  int checks = 0, failures = 0;

  fp_mul dut (.*);

  function automatic real rnd(input int emax);
    int e;
    e = int'($urandom % (2*emax+1)) - emax;
    return $bitstoreal({1'($urandom), 11'(1023 + e), 20'($urandom), 32'($urandom)});
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, exp_r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      ra = rnd(i < 500 ? 8 : 60);
      rb = (i % 7 == 0) ? -ra * (1.0 + 1e-12) : rnd(i < 500 ? 8 : 60);
      if (i % 11 == 0) rb = 0.0;
      @(negedge clk);
      a = $realtobits(ra); b = $realtobits(rb); in_valid = 1;
      exp_r = ra * rb;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || y != $realtobits(exp_r)) begin
        failures++;
        if (failures < 10) $display("FAIL %g %s %g: got %h exp %h", ra, "*", rb, y, $realtobits(exp_r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
