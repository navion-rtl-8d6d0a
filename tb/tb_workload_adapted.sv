// tb_workload_adapted: the adapted configurations of the EuRoC evaluation
// (35 to 150 features per frame, horizon of 10 or 15 keyframes) run on the
// blocks at their default sizes (200-feature list, 20-keyframe solver).
//
// Solver: the 300x300 solver holds a horizon of h < 20 keyframes by loading
// the states of the h active keyframes as a random banded positive definite
// system and the unused keyframes as identity blocks with a zero right-hand
// side. For h = 10 and h = 15 the test solves that system, checks the residual
// of the active part against a reference product computed here, checks that
// the unused unknowns come back exactly 0.0, and reports the multiply-accumulate
// steps and clocks of the solve (the solver always visits the full band).
//
// Tracking Data: for 35, 50, 100 and 150 features the list is filled from
// empty, each entry is read back, and one in three features is then lost and
// removed; the count must follow.
module tb_workload_adapted;
  localparam int NKF = 20, BS = 15, BAND = 4, N = NKF * BS, IW = $clog2(N);
  localparam int MAXF = 200, IXW = $clog2(MAXF);
  logic clk = 0, rst_n = 0;
  always #6 clk = ~clk;

  logic start = 0, busy, done;
  logic [31:0] n_mac;
  logic m_req_valid = 0, m_req_we = 0, m_rsp_valid, m_rsp_masked;
  logic [IW-1:0] m_req_row = 0, m_req_col = 0;
  logic [63:0] m_req_wdata = 0, m_rsp_rdata;
  logic v_req_valid = 0, v_req_we = 0, v_rsp_valid;
  logic [IW-1:0] v_req_idx = 0;
  logic [63:0] v_req_wdata = 0, v_rsp_rdata;

  lin_solver u_ls (.*);

  logic op_valid = 0, rsp_valid, rsp_ok;
  logic [1:0] op = 0;
  logic [IXW-1:0] idx = 0;
  logic [43:0] wdata = 0, rsp_data;
  logic [IXW:0] count;

  track_data_mem u_td (.clk, .rst_n, .op_valid, .op, .idx, .wdata, .rsp_valid, .rsp_ok, .rsp_data, .count);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  real Hm [N][N];
  real bv [N];
  real x [N];

  function automatic bit in_band(int r, int c);
    int a, d;
    a = r / BS; d = c / BS;
    return (a > d ? a - d : d - a) <= BAND;
  endfunction

  task automatic solve_horizon(int h);
    int na, cyc;
    real mx, rowsum, res;
    na = h * BS;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) Hm[r][c] = 0.0;
    for (int r = 0; r < na; r++) for (int c = r + 1; c < na; c++)
      if (in_band(r, c)) begin
        Hm[r][c] = real'($urandom % 2001) / 1000.0 - 1.0; Hm[c][r] = Hm[r][c];
      end
    mx = 1.0;
    for (int r = 0; r < N; r++) begin
      if (r < na) begin
        rowsum = 1.0;
        for (int c = 0; c < na; c++) if (c != r) rowsum += (Hm[r][c] < 0 ? -Hm[r][c] : Hm[r][c]);
        Hm[r][r] = 1.5 * rowsum;
        bv[r] = real'($urandom % 2001) / 100.0 - 10.0;
      end else begin
        Hm[r][r] = 1.0;     // unused keyframe: identity block
        bv[r] = 0.0;
      end
      if (Hm[r][r] > mx) mx = Hm[r][r];
    end
    for (int r = 0; r < N; r++) for (int c = r; c < N; c++)
      if (in_band(r, c)) begin
        @(negedge clk);
        m_req_valid = 1; m_req_we = 1; m_req_row = IW'(r); m_req_col = IW'(c);
        m_req_wdata = $realtobits(Hm[r][c]);
      end
    @(negedge clk); m_req_valid = 0;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      v_req_valid = 1; v_req_we = 1; v_req_idx = IW'(r); v_req_wdata = $realtobits(bv[r]);
    end
    @(negedge clk); v_req_valid = 0;
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int r = 0; r < N; r++) begin
      v_req_valid = 1; v_req_we = 0; v_req_idx = IW'(r);
      @(negedge clk); v_req_valid = 0;
      x[r] = $bitstoreal(v_rsp_rdata);
    end
    for (int r = 0; r < N; r++) begin
      if (r < na) begin
        res = -bv[r];
        for (int c = 0; c < na; c++) res += Hm[r][c] * x[c];
        check((res < 0 ? -res : res) <= 1e-9 * mx, $sformatf("horizon %0d: residual row %0d = %g", h, r, res));
      end else
        check(x[r] == 0.0, $sformatf("horizon %0d: unused unknown %0d = %g", h, r, x[r]));
    end
    $display("horizon %0d keyframes: %0d multiply-accumulate steps, %0d clocks", h, n_mac, cyc);
  endtask

  task automatic td(int o, int i, logic [43:0] d);
    @(negedge clk);
    op_valid = 1; op = 2'(o); idx = IXW'(i); wdata = d;
    @(negedge clk);
    op_valid = 0;
  endtask

  task automatic features(int nf);
    int n;
    while (count != 0) td(2, 0, '0);
    for (int k = 0; k < nf; k++) begin
      td(0, 0, {12'(k), 16'(k * 64), 16'(k * 32)});
      check(rsp_ok, "feature appended");
    end
    check(int'(count) == nf, $sformatf("%0d features held", nf));
    for (int k = 0; k < nf; k++) begin
      td(3, k, '0);
      check(rsp_ok && rsp_data == {12'(k), 16'(k * 64), 16'(k * 32)}, $sformatf("feature %0d of %0d", k, nf));
    end
    n = nf;
    for (int k = 0; k < nf; k += 3) begin td(2, 0, '0); n--; end
    check(int'(count) == n, $sformatf("%0d features after losses", n));
    $display("%0d features per frame: held, read back, %0d left after losses", nf, n);
  endtask

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    features(35);
    features(50);
    features(100);
    features(150);
    solve_horizon(10);
    solve_horizon(15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
