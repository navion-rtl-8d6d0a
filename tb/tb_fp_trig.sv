// tb_fp_trig: self-checking test of the double-precision sine/cosine unit.
// 500 random angles over [-pi, pi] (plus 0, +-pi/2, +-pi and tiny angles) are
// compared with the simulator's $sin and $cos; the absolute error of each result
// must stay below 1e-14. The latency from in_valid to out_valid is checked.
module tb_fp_trig;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, busy, out_valid;
  logic [63:0] a = 0, sin_y, cos_y;
  int checks = 0, failures = 0;
  real worst = 0.0;

  fp_trig dut (.*);

  task automatic run(real ang);
    int cyc;
    real es, ec;
    @(negedge clk);
    in_valid = 1; a = $realtobits(ang);
    @(negedge clk);
    in_valid = 0;
    cyc = 1;
    while (!out_valid && cyc < 200) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 62) begin failures++; if (failures < 10) $display("FAIL latency %0d", cyc); end
    es = $bitstoreal(sin_y) - $sin(ang); if (es < 0) es = -es;
    ec = $bitstoreal(cos_y) - $cos(ang); if (ec < 0) ec = -ec;
    if (es > worst) worst = es;
    if (ec > worst) worst = ec;
    checks += 2;
    if (es > 1e-14 || ec > 1e-14) begin
      failures++;
      if (failures < 10) $display("FAIL angle %g: sin %g (%g) cos %g (%g)", ang, $bitstoreal(sin_y), $sin(ang), $bitstoreal(cos_y), $cos(ang));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pi;
    pi = 3.14159265358979323846;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0.0); run(pi / 2); run(-pi / 2); run(pi); run(-pi); run(1e-9); run(-3e-12);
    for (int k = 0; k < 500; k++) run((real'($urandom) / 4294967295.0 * 2.0 - 1.0) * pi);
    $display("largest absolute error %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
