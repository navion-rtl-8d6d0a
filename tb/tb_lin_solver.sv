// tb_lin_solver: self-checking test of the in-place banded Cholesky solver.
// A random symmetric, diagonally dominant (so positive definite) matrix with
// the keyframe-block band structure is loaded through the idle-time matrix port,
// one write outside the band checks that it is masked, and a random right-hand
// side is loaded into the vector memory. After the solve, dx is read back and the
// residual H*dx - eps is computed with the simulator's double arithmetic from the
// testbench's own copy of H; every component must be below 1e-9 relative to the
// largest entry. The number of multiply-accumulate steps must equal the count of
// band terms worked out here, and the run time must stay under 8 clocks per step
// plus 140 per row. Run with a reduced size (NKF=6, BS=3, BAND=2) and twice.
module tb_lin_solver;
  localparam int NKF = 6, BS = 3, BAND = 2, N = NKF * BS, IW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [31:0] n_mac;
  logic m_req_valid = 0, m_req_we = 0;
  logic [IW-1:0] m_req_row = 0, m_req_col = 0;
  logic [63:0] m_req_wdata = 0;
  logic m_rsp_valid, m_rsp_masked;
  logic [63:0] m_rsp_rdata;
  logic v_req_valid = 0, v_req_we = 0;
  logic [IW-1:0] v_req_idx = 0;
  logic [63:0] v_req_wdata = 0;
  logic v_rsp_valid;
  logic [63:0] v_rsp_rdata;
  int checks = 0, failures = 0;

  lin_solver #(.NKF(NKF), .BS(BS), .BAND(BAND)) dut (.*);

  real H [N][N];
  real b [N];
  real x [N];

  function automatic bit in_band(int r, int c);
    int a, d;
    a = r / BS; d = c / BS;
    return (a > d ? a - d : d - a) <= BAND;
  endfunction
  function automatic int lo(int c);
    return (c / BS > BAND) ? (c / BS - BAND) * BS : 0;
  endfunction
  function automatic int hi(int r);
    return ((r / BS + BAND + 1 < NKF) ? r / BS + BAND + 1 : NKF) * BS - 1;
  endfunction
  function automatic real urand();
    return real'($urandom % 20001) / 10000.0 - 1.0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_mac, cyc;
    real res, mx, rowsum;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      // build H
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) H[r][c] = 0.0;
      for (int r = 0; r < N; r++)
        for (int c = r + 1; c < N; c++)
          if (in_band(r, c)) begin H[r][c] = urand(); H[c][r] = H[r][c]; end
      mx = 0.0;
      for (int r = 0; r < N; r++) begin
        rowsum = 1.0;
        for (int c = 0; c < N; c++) if (c != r) rowsum += (H[r][c] < 0 ? -H[r][c] : H[r][c]);
        H[r][r] = rowsum * (1.0 + 0.5 * (urand() + 1.0));
        if (H[r][r] > mx) mx = H[r][r];
        b[r] = 10.0 * urand();
      end
      // load: upper triangle through the matrix port, then one write outside the band
      for (int r = 0; r < N; r++)
        for (int c = r; c < N; c++)
          if (in_band(r, c)) begin
            @(negedge clk);
            m_req_valid = 1; m_req_we = 1; m_req_row = IW'(r); m_req_col = IW'(c); m_req_wdata = $realtobits(H[r][c]);
          end
      @(negedge clk);
      m_req_row = 0; m_req_col = IW'(N - 1); m_req_wdata = $realtobits(5.0);
      @(negedge clk);
      m_req_valid = 0;
      checks++;
      if (!m_rsp_masked) begin failures++; $display("FAIL write outside band not masked"); end
      @(negedge clk);
      m_req_valid = 1; m_req_we = 0;
      @(negedge clk);
      m_req_valid = 0;
      checks++;
      if (!m_rsp_valid || m_rsp_rdata != 64'h0) begin failures++; $display("FAIL masked read %h", m_rsp_rdata); end
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        v_req_valid = 1; v_req_we = 1; v_req_idx = IW'(r); v_req_wdata = $realtobits(b[r]);
      end
      @(negedge clk); v_req_valid = 0;
      // solve
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      // read dx
      for (int r = 0; r < N; r++) begin
        v_req_valid = 1; v_req_we = 0; v_req_idx = IW'(r);
        @(negedge clk);
        v_req_valid = 0;
        x[r] = $bitstoreal(v_rsp_rdata);
      end
      for (int r = 0; r < N; r++) begin
        res = -b[r];
        for (int c = 0; c < N; c++) res += H[r][c] * x[c];
        checks++;
        if ((res < 0 ? -res : res) > 1e-9 * mx) begin
          failures++;
          $display("FAIL residual row %0d = %g", r, res);
        end
      end
      exp_mac = 0;
      for (int i = 0; i < N; i++) begin
        for (int j = i; j <= hi(i); j++) if (i > lo(j)) exp_mac += i - lo(j);
        exp_mac += i - lo(i);
        exp_mac += hi(i) - i;
      end
      checks++;
      if (n_mac != 32'(exp_mac)) begin failures++; $display("FAIL n_mac %0d exp %0d", n_mac, exp_mac); end
      checks++;
      if (cyc > 8 * exp_mac + 140 * N) begin failures++; $display("FAIL cycles %0d", cyc); end
      $display("run %0d: N=%0d, %0d MAC steps (dense would need %0d), %0d cycles", run, N, n_mac,
               N*(N-1)*(N+1)/6 + N*(N-1), cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
