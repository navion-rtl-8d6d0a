// tb_navion_full: end-to-end test of navion_top with every parameter at its
// default: 752x480 stereo frames, 15x15 detection cells, 51x5 stereo template
// in a 421-pixel strip, a 20-keyframe horizon (300x300 system, keyframe band 4), 4000 feature tracks of
// 10 observations in 4000 entries. It runs the same sequence as tb_navion_top.
// Two clocks run at the chip's VFE/BE ratio (62.5 / 83.3 MHz).
//
// Frontend sequence: a stereo keyframe (right = left shifted by a known
// disparity), stereo requests, a non-keyframe whose right stream must be
// ignored, a refused stereo request, reads of both tracking frames (Frame (1) and
// Frame (2)), a second keyframe with new content and stereo requests again.
// Every pixel read and every stereo result is compared with a reference that
// compresses and reconstructs the frames here. In both keyframes every grid
// cell's detected feature (position and Shi-Tomasi score) is compared with a
// reference detector; in the non-keyframe no feature may be reported. Detected
// features of the first keyframe are appended to the Tracking Data list until it
// refuses one (full); in the non-keyframe one entry is updated in place and one
// removed, and the whole list is read back against a model.
//
// Backend sequence, in parallel on the backend clock: feature tracks are written
// until the dense memory is full, read back and deleted; inertial measurements
// are streamed in single precision and compared in double precision; sines and
// cosines of a few angles are compared with $sin/$cos; every register of the
// register file is written and read back on both ports; then a banded positive
// definite system is loaded (with one masked write) and solved, and the residual
// is checked.
//
// Each mechanism is counted and must happen at least once: keyframe,
// non-keyframe, tracking-bank switch, stereo match, refused stereo request,
// ignored right stream, detected feature, detection skipped in a non-keyframe,
// Tracking Data full / update / removal, full track memory, track removal,
// inertial measurement, sine/cosine, register file access, masked matrix access,
// solve.
module tb_navion_full;
  import navion_pkg::*;
  localparam int W = 752, H = 480, TW = 51, TH = 5, RW = 421, CW = 15, CH = 15;
  localparam int MAXF = 200, NKF = 20, BS = 15, BAND = 4, N = NKF * BS;
  localparam int TRACKS = 4000, AGE = 10, OBS = 4000, PTR_W = 12, NREG = 85;
  localparam int NSM = 1;
  localparam int WATCHDOG = 30000000;

  localparam int XW = $clog2(W), YW = $clog2(H), DW = $clog2(RW), IW = $clog2(N);
  localparam int TKW = $clog2(TRACKS), SLW = $clog2(AGE);

  logic clk_vfe = 0, clk_be = 0, rst_n = 0;
  always #8 clk_vfe = ~clk_vfe;
  always #6 clk_be  = ~clk_be;

  logic kf = 0, l_pix_valid = 0, r_pix_valid = 0;
  logic [7:0] l_pix = 0, r_pix = 0;
  logic frame_done, frame_is_kf, cur_bank;
  logic [20:0] fd_min_score = 0, fd_score;
  logic fd_valid;
  logic [XW-1:0] fd_x;
  logic [YW-1:0] fd_y;
  logic td_op_valid = 0, td_rsp_valid, td_rsp_ok;
  logic [1:0] td_op = 0;
  logic [$clog2(MAXF)-1:0] td_idx = 0;
  logic [43:0] td_wdata = 0, td_rsp_data;
  logic [$clog2(MAXF):0] td_count;
  logic ft_rd_en = 0, ft_rd_bank = 0, ft_rd_valid;
  logic [XW-1:0] ft_rd_x = 0;
  logic [YW-1:0] ft_rd_y = 0;
  logic [4:0] ft_rd_pix;
  logic sm_req_valid = 0, sm_busy, sm_res_valid, sm_res_found;
  logic [XW-1:0] sm_req_x = 0;
  logic [YW-1:0] sm_req_y = 0;
  logic [DW-1:0] sm_res_disp;
  logic [15:0] sm_res_cost;
  logic fg_busy, fg_full, fg_wr_fail, fg_rd_valid, fg_rd_hit;
  logic [PTR_W:0] fg_n_used;
  logic fg_wr_en = 0, fg_del_en = 0, fg_rd_en = 0;
  logic [TKW-1:0] fg_wr_track = 0, fg_del_track = 0, fg_rd_track = 0;
  logic [SLW-1:0] fg_wr_slot = 0, fg_rd_slot = 0;
  obs_t fg_wr_obs = '0, fg_rd_obs;
  logic imu_resync = 0, imu_valid = 0, imu_meas_valid;
  logic [31:0] imu_word = 0;
  logic [63:0] imu_acc [3], imu_gyro [3];
  logic trig_valid = 0, trig_busy, trig_out_valid;
  logic [63:0] trig_a = 0, trig_sin, trig_cos;
  logic rf_we = 0;
  logic [$clog2(NREG)-1:0] rf_waddr = 0, rf_ra_addr = 0, rf_rb_addr = 0;
  logic [63:0] rf_wdata = 0, rf_ra_data, rf_rb_data;
  logic ls_start = 0, ls_busy, ls_done;
  logic [31:0] ls_n_mac;
  logic ls_m_req_valid = 0, ls_m_req_we = 0, ls_m_rsp_valid, ls_m_rsp_masked;
  logic [IW-1:0] ls_m_req_row = 0, ls_m_req_col = 0;
  logic [63:0] ls_m_req_wdata = 0, ls_m_rsp_rdata;
  logic ls_v_req_valid = 0, ls_v_req_we = 0, ls_v_rsp_valid;
  logic [IW-1:0] ls_v_req_idx = 0;
  logic [63:0] ls_v_req_wdata = 0, ls_v_rsp_rdata;

  navion_top dut (.*);

  int checks = 0, failures = 0;
  int n_kf = 0, n_nkf = 0, n_bank = 0, n_sm = 0, n_sm_refused = 0, n_right_ignored = 0;
  int n_fd = 0, n_fd_skipped = 0, n_td_full = 0, n_td_upd = 0, n_td_del = 0;
  logic [43:0] td_model [$];
  int n_rf = 0, n_imu = 0, n_trig = 0;

  function automatic logic [63:0] f32_ref(logic [31:0] f);
    real v;
    int e;
    e = int'(f[30:23]);
    v = (e == 0) ? real'(f[22:0]) : real'(f[22:0]) + 8388608.0;
    if (e == 0) e = 1;
    for (int k = 0; k < 150 - e; k++) v = v * 0.5;
    for (int k = 0; k < e - 150; k++) v = v * 2.0;
    if (f[31]) v = -v;
    return $realtobits(v);
  endfunction
  int n_masked = 0, n_full = 0, n_del = 0, n_solve = 0;
  bit vfe_done = 0, be_done = 0;

  // reference frames: 0/1 = tracking banks, 2 = left keyframe, 3 = right keyframe
  logic [7:0] img [4][H][W];
  logic [7:0] Lsrc [H][W];
  logic [7:0] Rsrc [H][W];

  function automatic int recon(int f, int x, int y);
    int mn, mx, t, p, bx, by, hi;
    bx = x / 4 * 4; by = y / 4 * 4;
    mn = 99; mx = -1;
    for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++) begin
      p = img[f][by + r][bx + q] >> 3;
      if (p < mn) mn = p;
      if (p > mx) mx = p;
    end
    t = (mn + mx) / 2;
    hi = 2 * t - mn; if (hi > 31) hi = 31;
    return ((img[f][y][x] >> 3) >= t) ? hi : mn;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // compressed right-frame blocks written in the current frame
  int rblk = 0;
  always @(posedge clk_vfe) if (dut.rc_valid) rblk++;

  // detected features of the current frame
  int fdn = 0;
  int fdx [$], fdy [$], fds [$];
  always @(posedge clk_vfe) if (fd_valid) begin
    fdn++; fdx.push_back(int'(fd_x)); fdy.push_back(int'(fd_y)); fds.push_back(int'(fd_score));
  end

  function automatic int isqrt(longint v);
    longint r;
    r = 0;
    for (int b = 20; b >= 0; b--) if ((r + (64'd1 << b)) * (r + (64'd1 << b)) <= v) r += 64'd1 << b;
    return int'(r);
  endfunction

  function automatic int st_score(int u, int v);
    longint a, b, c;
    a = 0; b = 0; c = 0;
    if (u < 2 || u > W - 3 || v < 2 || v > H - 3) return 0;
    for (int dv = -1; dv <= 1; dv++) for (int du = -1; du <= 1; du++) begin
      longint gx, gy;
      gx = longint'(Lsrc[v+dv][u+du+1]) - longint'(Lsrc[v+dv][u+du-1]);
      gy = longint'(Lsrc[v+dv+1][u+du]) - longint'(Lsrc[v+dv-1][u+du]);
      a += gx * gx; b += gx * gy; c += gy * gy;
    end
    return int'(a + c - isqrt((a - c) * (a - c) + 4 * b * b));
  endfunction

  // compare the detected features with the best pixel of each cell
  task automatic fd_check();
    localparam int NCX = (W - 3) / CW + 1, NCY = (H - 3) / CH + 1;
    int sc [H][W];
    int bs, bx, by, k;
    for (int v = 0; v < H; v++) for (int u = 0; u < W; u++) sc[v][u] = st_score(u, v);
    check(fdn == NCX * NCY, $sformatf("%0d features detected, expected %0d", fdn, NCX * NCY));
    k = 0;
    for (int cy = 0; cy < NCY; cy++) for (int cx = 0; cx < NCX; cx++) begin
      bs = -1; bx = 0; by = 0;
      for (int v = cy * CH; v < (cy + 1) * CH && v <= H - 3; v++)
        for (int u = cx * CW; u < (cx + 1) * CW && u <= W - 3; u++)
          if (sc[v][u] > bs) begin bs = sc[v][u]; bx = u; by = v; end
      if (k < fdn) begin
        check(fdx[k] == bx && fdy[k] == by && fds[k] == bs,
              $sformatf("feature of cell %0d,%0d: (%0d,%0d) %0d, exp (%0d,%0d) %0d", cx, cy, fdx[k], fdy[k], fds[k], bx, by, bs));
        n_fd++;
      end
      k++;
    end
  endtask

  task automatic stream_frame(bit is_kf, int disp, int seed);
    rblk = 0;
    fdn = 0; fdx.delete(); fdy.delete(); fds.delete();
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      Lsrc[r][c] = 8'($urandom);
      Rsrc[r][c] = 8'($urandom);
    end
    if (is_kf)
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
        if (c + disp < W) Rsrc[r][c] = Lsrc[r][c + disp];
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      @(negedge clk_vfe);
      kf = is_kf;
      l_pix_valid = 1; l_pix = Lsrc[r][c];
      r_pix_valid = 1; r_pix = Rsrc[r][c];
    end
    @(negedge clk_vfe);
    l_pix_valid = 0; r_pix_valid = 0;
    while (!frame_done) @(negedge clk_vfe);
    @(negedge clk_vfe);
    check(rblk == (is_kf ? (W / 4) * (H / 4) : 0), $sformatf("%0d right blocks stored", rblk));
    if (!is_kf && rblk == 0) n_right_ignored++;
    repeat (4) @(negedge clk_vfe);
    if (is_kf) fd_check();
    else begin
      check(fdn == 0, "features detected in a non-keyframe");
      if (fdn == 0) n_fd_skipped++;
    end
  endtask

  task automatic sm_check(int fx, int fy, bit expect_refused);
    int best, bd, c, cyc;
    best = 1 << 30; bd = 0;
    for (int d = 0; d <= RW - TW; d++) begin
      if (fx - d - TW/2 < 0) break;
      c = 0;
      for (int r = 0; r < TH; r++) for (int q = 0; q < TW; q++) begin
        int a, b;
        a = recon(2, fx - TW/2 + q, fy - TH/2 + r);
        b = recon(3, fx - d - TW/2 + q, fy - TH/2 + r);
        c += a > b ? a - b : b - a;
      end
      if (c < best) begin best = c; bd = d; end
    end
    @(negedge clk_vfe);
    sm_req_valid = 1; sm_req_x = XW'(fx); sm_req_y = YW'(fy);
    @(negedge clk_vfe);
    sm_req_valid = 0;
    if (expect_refused) begin
      repeat (5) @(negedge clk_vfe);
      check(!sm_busy && !sm_res_valid, "stereo request taken in a non-keyframe");
      n_sm_refused++;
      return;
    end
    cyc = 0;
    while (!sm_res_valid && cyc < 2000000) begin @(negedge clk_vfe); cyc++; end
    check(sm_res_valid && sm_res_found && int'(sm_res_disp) == bd && int'(sm_res_cost) == best,
          $sformatf("stereo (%0d,%0d): disp %0d cost %0d, exp %0d %0d", fx, fy, sm_res_disp, sm_res_cost, bd, best));
    n_sm++;
  endtask

  task automatic td_op_do(int o, int i, logic [43:0] d, bit exp_ok);
    @(negedge clk_vfe);
    td_op_valid = 1; td_op = 2'(o); td_idx = $bits(td_idx)'(i); td_wdata = d;
    @(negedge clk_vfe);
    td_op_valid = 0;
    check(td_rsp_valid && td_rsp_ok == exp_ok && (o != 3 || !exp_ok || td_rsp_data == td_model[i]),
          $sformatf("tracking data op %0d idx %0d", o, i));
    check(int'(td_count) == td_model.size() + int'(o == 0 && exp_ok) - int'(o == 2 && exp_ok), "tracking data count");
  endtask

  // first keyframe: append detected features until the list refuses one
  task automatic td_fill();
    logic [43:0] e;
    for (int k = 0; k < fdn && k <= MAXF; k++) begin
      e = {12'(k), 10'(fdx[k]), 6'd0, 10'(fdy[k]), 6'd0};
      td_op_do(0, 0, e, k < MAXF);
      if (k < MAXF) td_model.push_back(e);
      else n_td_full++;
    end
  endtask

  // non-keyframe: one feature moved, one lost, then the whole list read
  task automatic td_track();
    logic [43:0] e;
    e = {td_model[1][43:32], 16'(td_model[1][31:16] + 16'd37), 16'(td_model[1][15:0] - 16'd5)};
    td_op_do(1, 1, e, 1); td_model[1] = e; n_td_upd++;
    td_op_do(2, 0, '0, 1);
    td_model[0] = td_model[td_model.size() - 1]; void'(td_model.pop_back()); n_td_del++;
    for (int i = 0; i < td_model.size(); i++) td_op_do(3, i, '0, 1);
  endtask

  task automatic ft_check(int bank, int n);
    int x, y;
    for (int i = 0; i < n; i++) begin
      x = $urandom % W; y = $urandom % H;
      @(negedge clk_vfe);
      ft_rd_en = 1; ft_rd_bank = bank[0]; ft_rd_x = XW'(x); ft_rd_y = YW'(y);
      @(negedge clk_vfe);
      ft_rd_en = 0;
      check(ft_rd_valid && int'(ft_rd_pix) == recon(bank, x, y),
            $sformatf("tracking frame %0d (%0d,%0d) got %0d exp %0d", bank, x, y, ft_rd_pix, recon(bank, x, y)));
    end
  endtask

  // ---------------- vision frontend sequence ----------------
  initial begin : vfe
    int bank;
    @(posedge rst_n);
    bank = 0;
    for (int f = 0; f < 3; f++) begin
      bit is_kf;
      is_kf = (f != 1);
      stream_frame(is_kf, 5 + 4 * f, f);
      img[bank] = Lsrc;
      if (is_kf) begin img[2] = Lsrc; img[3] = Rsrc; n_kf++; end
      else n_nkf++;
      check(frame_is_kf == is_kf, "mode of the completed frame");
      check(cur_bank == bank[0], "tracking bank holding the newest frame");
      if (f > 0) n_bank++;
      bank = 1 - bank;
      if (is_kf) begin
        for (int i = 0; i < NSM; i++)
          sm_check(TW/2 + RW/2 + ($urandom % (W - TW - RW/2)), TH/2 + ($urandom % (H - TH + 1)), 0);
      end else begin
        sm_check(W - TW, H / 2, 1);
      end
      if (f == 0) td_fill();
      if (f == 1) td_track();
      if (f == 1) begin
        ft_check(0, 40);
        ft_check(1, 40);
      end
    end
    ft_check(0, 20);
    vfe_done = 1;
  end

  // ---------------- backend sequence ----------------
  real Hm [N][N];
  real bv [N];
  function automatic bit in_band(int r, int c);
    int a, d;
    a = r / BS; d = c / BS;
    return (a > d ? a - d : d - a) <= BAND;
  endfunction

  initial begin : be
    obs_t o;
    real mx, rowsum, res;
    int cnt;
    @(posedge rst_n);
    @(negedge clk_be);
    while (fg_busy) @(negedge clk_be);
    // fill the dense memory: OBS observations spread over the tracks
    cnt = 0;
    for (int t = 0; t < TRACKS && cnt <= OBS; t++)
      for (int s = 0; s < AGE && cnt <= OBS; s++) begin
        o = {5'(t), 64'(t * 1000 + s), 64'($urandom), 64'(s)};
        fg_wr_en = 1; fg_wr_track = TKW'(t); fg_wr_slot = SLW'(s); fg_wr_obs = o;
        @(negedge clk_be); fg_wr_en = 0;
        @(negedge clk_be);
        check(fg_wr_fail == (cnt == OBS), "track memory refusal");
        cnt++;
      end
    check(fg_full, "track memory full");
    if (fg_full) n_full++;
    // read back the first track
    for (int s = 0; s < AGE; s++) begin
      fg_rd_en = 1; fg_rd_track = 0; fg_rd_slot = SLW'(s);
      @(negedge clk_be); fg_rd_en = 0;
      @(negedge clk_be);
      check(fg_rd_valid && fg_rd_hit && fg_rd_obs.kf_id == 0 && fg_rd_obs.u == 64'(s), "track read");
    end
    // remove it
    fg_del_en = 1; fg_del_track = 0;
    @(negedge clk_be); fg_del_en = 0;
    while (fg_busy) @(negedge clk_be);
    check(!fg_full && int'(fg_n_used) == OBS - AGE, "track removal frees its entries");
    n_del++;
    fg_rd_en = 1; fg_rd_track = 0; fg_rd_slot = 0;
    @(negedge clk_be); fg_rd_en = 0;
    @(negedge clk_be);
    check(fg_rd_valid && !fg_rd_hit, "removed track reads empty");

    // inertial measurements: six single-precision words each
    for (int n = 0; n < 4; n++) begin
      logic [31:0] w [6];
      for (int i = 0; i < 6; i++) begin
        w[i] = {1'($urandom), 8'(100 + $urandom % 50), 23'($urandom)};
        @(negedge clk_be);
        imu_valid = 1; imu_word = w[i];
      end
      @(negedge clk_be); imu_valid = 0;
      check(imu_meas_valid, "inertial measurement complete");
      for (int i = 0; i < 3; i++)
        check(imu_acc[i] == f32_ref(w[i]) && imu_gyro[i] == f32_ref(w[3+i]), $sformatf("inertial value %0d", i));
      if (imu_meas_valid) n_imu++;
    end

    // sine and cosine of a few angles
    for (int n = 0; n < 5; n++) begin
      real ang, es, ec;
      ang = (real'($urandom % 2001) / 1000.0 - 1.0) * 3.14159;
      @(negedge clk_be);
      trig_valid = 1; trig_a = $realtobits(ang);
      @(negedge clk_be); trig_valid = 0;
      while (!trig_out_valid) @(negedge clk_be);
      es = $bitstoreal(trig_sin) - $sin(ang); ec = $bitstoreal(trig_cos) - $cos(ang);
      check(es < 1e-14 && es > -1e-14 && ec < 1e-14 && ec > -1e-14, $sformatf("sin/cos of %g", ang));
      n_trig++;
    end

    // register file: write every register, read back on both ports
    for (int i = 0; i < NREG; i++) begin
      @(negedge clk_be);
      rf_we = 1; rf_waddr = $bits(rf_waddr)'(i); rf_wdata = $realtobits(real'(i) * 0.5 - 3.0);
    end
    @(negedge clk_be); rf_we = 0;
    for (int i = 0; i < NREG; i++) begin
      rf_ra_addr = $bits(rf_ra_addr)'(i); rf_rb_addr = $bits(rf_rb_addr)'(NREG - 1 - i);
      @(negedge clk_be);
      check(rf_ra_data == $realtobits(real'(i) * 0.5 - 3.0) && rf_rb_data == $realtobits(real'(NREG - 1 - i) * 0.5 - 3.0),
            $sformatf("register file read %0d", i));
      n_rf++;
    end

    // linear system
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) Hm[r][c] = 0.0;
    for (int r = 0; r < N; r++) for (int c = r + 1; c < N; c++)
      if (in_band(r, c)) begin
        Hm[r][c] = real'($urandom % 2001) / 1000.0 - 1.0; Hm[c][r] = Hm[r][c];
      end
    mx = 0.0;
    for (int r = 0; r < N; r++) begin
      rowsum = 1.0;
      for (int c = 0; c < N; c++) if (c != r) rowsum += (Hm[r][c] < 0 ? -Hm[r][c] : Hm[r][c]);
      Hm[r][r] = 1.5 * rowsum;
      if (Hm[r][r] > mx) mx = Hm[r][r];
      bv[r] = real'($urandom % 2001) / 100.0 - 10.0;
    end
    for (int r = 0; r < N; r++) for (int c = r; c < N; c++)
      if (in_band(r, c)) begin
        @(negedge clk_be);
        ls_m_req_valid = 1; ls_m_req_we = 1; ls_m_req_row = IW'(r); ls_m_req_col = IW'(c);
        ls_m_req_wdata = $realtobits(Hm[r][c]);
      end
    @(negedge clk_be);
    ls_m_req_row = IW'(N - 1); ls_m_req_col = 0; ls_m_req_wdata = $realtobits(7.0);  // outside the band
    @(negedge clk_be);
    ls_m_req_valid = 0;
    check(ls_m_rsp_masked, "write outside the band masked");
    if (ls_m_rsp_masked) n_masked++;
    for (int r = 0; r < N; r++) begin
      @(negedge clk_be);
      ls_v_req_valid = 1; ls_v_req_we = 1; ls_v_req_idx = IW'(r); ls_v_req_wdata = $realtobits(bv[r]);
    end
    @(negedge clk_be); ls_v_req_valid = 0;
    ls_start = 1;
    @(negedge clk_be); ls_start = 0;
    while (!ls_done) @(negedge clk_be);
    n_solve++;
    begin
      real x [N];
      for (int r = 0; r < N; r++) begin
        ls_v_req_valid = 1; ls_v_req_we = 0; ls_v_req_idx = IW'(r);
        @(negedge clk_be); ls_v_req_valid = 0;
        x[r] = $bitstoreal(ls_v_rsp_rdata);
      end
      for (int r = 0; r < N; r++) begin
        res = -bv[r];
        for (int c = 0; c < N; c++) res += Hm[r][c] * x[c];
        check((res < 0 ? -res : res) <= 1e-9 * mx, $sformatf("residual row %0d = %g", r, res));
      end
    end
    $display("solve: %0d multiply-accumulate steps", ls_n_mac);
    be_done = 1;
  end

  initial begin : wd
    repeat (WATCHDOG) @(posedge clk_vfe);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    repeat (4) @(posedge clk_vfe);
    rst_n = 1;
    wait (vfe_done && be_done);
    $display("detected features checked %0d, non-keyframe detections skipped %0d", n_fd, n_fd_skipped);
    $display("tracking data full %0d, updates %0d, removals %0d", n_td_full, n_td_upd, n_td_del);
    $display("keyframes %0d, non-keyframes %0d, bank switches %0d, stereo matches %0d, refused %0d, right streams ignored %0d",
             n_kf, n_nkf, n_bank, n_sm, n_sm_refused, n_right_ignored);
    $display("register file reads %0d, inertial measurements %0d, sine/cosine %0d", n_rf, n_imu, n_trig);
    $display("masked matrix writes %0d, track memory full %0d, track removals %0d, solves %0d",
             n_masked, n_full, n_del, n_solve);
    check(n_fd > 0 && n_fd_skipped > 0, "feature detection never happened or ran in a non-keyframe");
    check(n_td_full > 0 && n_td_upd > 0 && n_td_del > 0, "a tracking data mechanism never happened");
    check(n_kf > 0 && n_nkf > 0 && n_bank > 0 && n_sm > 0 && n_sm_refused > 0 && n_right_ignored > 0,
          "a frontend mechanism never happened");
    check(n_masked > 0 && n_full > 0 && n_rf > 0 && n_imu > 0 && n_trig > 0 && n_del > 0 && n_solve > 0, "a backend mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
