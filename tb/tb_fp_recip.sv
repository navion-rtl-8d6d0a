// tb_fp_recip: self-checking test of fp_recip. Random doubles (and exact powers of
// two) are inverted; the truncated result must lie within one unit in the last
// place of the simulator's 1/x, and must arrive 57 clocks after in_valid.
module tb_fp_recip;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, busy, out_valid;
  logic [63:0] a = 0, y;
  int checks = 0, failures = 0;

  fp_recip dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, er;
    longint d;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      ra = $bitstoreal({1'b0, 11'(1023 - 30 + int'($urandom % 61)), 20'($urandom), 32'($urandom)});
      if (i % 10 == 0) ra = $bitstoreal({1'b0, 11'(1023 - 20 + int'($urandom % 41)), 52'd0});
      if (i % 2 == 1) ra = -ra;
      er = 1.0 / ra;
      @(negedge clk);
      a = $realtobits(ra); in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      d = longint'(y) - longint'($realtobits(er));
      checks++;
      if (d > 1 || d < -1) begin
        failures++;
        if (failures < 10) $display("FAIL 1/%g got %h exp %h", ra, y, $realtobits(er));
      end
      checks++;
      if (lat != 57) begin
        failures++;
        if (failures < 10) $display("FAIL latency %0d", lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
