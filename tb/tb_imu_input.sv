// tb_imu_input: self-checking test of the inertial measurement input. 400
// measurements of six single-precision words are streamed with random gaps: most
// words are random normal numbers, mixed with zeros, subnormals, infinities and
// NaNs. Each finite value's expected double is computed with real arithmetic,
// (2^23 + m) * 2^(e-150) or m * 2^-149, scaled by exact powers of two; infinity
// and NaN are checked for class, sign and payload. The test also checks that
// meas_valid pulses exactly one clock after each sixth word, and that resync
// restarts the word count.
module tb_imu_input;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic resync = 0, in_valid = 0, meas_valid;
  logic [31:0] in_word = 0;
  logic [63:0] acc [3], gyro [3];
  int checks = 0, failures = 0, n_meas = 0, n_sub = 0, n_special = 0;

  imu_input dut (.*);

  function automatic logic [63:0] ref64(logic [31:0] f);
    real v;
    int e;
    e = int'(f[30:23]);
    if (e == 255) return {f[31], 11'h7FF, f[22:0], 29'd0};
    v = (e == 0) ? real'(f[22:0]) : real'(f[22:0]) + 8388608.0;
    if (e == 0) e = 1;
    for (int k = 0; k < 150 - e; k++) v = v * 0.5;
    for (int k = 0; k < e - 150; k++) v = v * 2.0;
    if (f[31]) v = -v;
    if (v == 0.0) return {f[31], 63'd0};
    return $realtobits(v);
  endfunction

  function automatic logic [31:0] rnd_word();
    int c;
    c = $urandom % 20;
    if (c == 0) return {1'($urandom), 31'd0};
    if (c == 1) begin n_sub++; return {1'($urandom), 8'd0, 23'($urandom)}; end
    if (c == 2) begin n_special++; return {1'($urandom), 8'hFF, ($urandom % 2 == 0) ? 23'd0 : 23'($urandom)}; end
    return {1'($urandom), 8'(1 + $urandom % 254), 23'($urandom)};
  endfunction

  task automatic cmp(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w [6];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // a partial measurement, then resync
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); in_valid = 1; in_word = 32'h3F800000;
    end
    @(negedge clk); in_valid = 0; resync = 1;
    @(negedge clk); resync = 0;
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < 6; i++) begin
        w[i] = rnd_word();
        @(negedge clk);
        in_valid = 1; in_word = w[i];
        checks++;
        if (meas_valid) begin failures++; $display("FAIL early meas_valid"); end
        if (i < 5 && $urandom % 3 == 0) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!meas_valid) begin failures++; if (failures < 10) $display("FAIL meas_valid missing"); end
      else n_meas++;
      for (int i = 0; i < 3; i++) begin
        cmp($sformatf("acc %0d (%h)", i, w[i]), acc[i], ref64(w[i]));
        cmp($sformatf("gyro %0d (%h)", i, w[3+i]), gyro[i], ref64(w[3+i]));
      end
      @(negedge clk);
      checks++;
      if (meas_valid) begin failures++; $display("FAIL meas_valid longer than one clock"); end
    end
    $display("measurements %0d, subnormal words %0d, infinity/NaN words %0d", n_meas, n_sub, n_special);
    checks++;
    if (n_sub == 0 || n_special == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
