// tb_stereo_match: self-checking test of the stereo matcher at a reduced size
// (64x16 frames, 7x3 template, 21-pixel search strip). The right frame is the
// left frame shifted by a known disparity, with small noise. For each feature
// the testbench searches every disparity itself (sum of absolute differences,
// ties to the smaller disparity) and compares disparity, cost and found flag;
// it also checks the clock count of one full search, and that a feature too
// close to the border is reported as not found. The two frame ports are modelled
// here as one-cycle-latency memories.
module tb_stereo_match;
  localparam int W = 64, H = 16, TW = 7, TH = 3, RW = 21;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, busy;
  logic [5:0] req_x = 0;
  logic [3:0] req_y = 0;
  logic l_rd_en, r_rd_en, res_valid, res_found;
  logic [5:0] l_rd_x, r_rd_x;
  logic [3:0] l_rd_y, r_rd_y;
  logic l_rd_valid = 0, r_rd_valid = 0;
  logic [4:0] l_rd_pix = 0, r_rd_pix = 0;
  logic [4:0] res_disp;
  logic [15:0] res_cost;
  int checks = 0, failures = 0;

  stereo_match #(.IMG_W(W), .IMG_H(H), .TW(TW), .TH(TH), .RW(RW)) dut (.*);

  logic [4:0] L [H][W];
  logic [4:0] R [H][W];

  always @(posedge clk) begin
    l_rd_valid <= l_rd_en; r_rd_valid <= r_rd_en;
    if (l_rd_en) l_rd_pix <= L[l_rd_y][l_rd_x];
    if (r_rd_en) r_rd_pix <= R[r_rd_y][r_rd_x];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic match(int fx, int fy);
    int best, bd, c, cyc, nd;
    bit ok;
    ok = (fx >= TW/2) && (fx + TW/2 < W) && (fy >= TH/2) && (fy + TH/2 < H);
    best = 1 << 30; bd = 0; nd = 0;
    if (ok)
      for (int d = 0; d <= RW - TW; d++) begin
        if (fx - d - TW/2 < 0) break;
        nd++;
        c = 0;
        for (int r = 0; r < TH; r++) for (int q = 0; q < TW; q++) begin
          int a, b;
          a = L[fy - TH/2 + r][fx - TW/2 + q];
          b = R[fy - TH/2 + r][fx - d - TW/2 + q];
          c += a > b ? a - b : b - a;
        end
        if (c < best) begin best = c; bd = d; end
      end
    @(negedge clk);
    req_valid = 1; req_x = 6'(fx); req_y = 4'(fy);
    @(negedge clk);
    req_valid = 0;
    cyc = 1;
    while (!res_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (res_found != (ok && nd > 0) || (ok && (int'(res_disp) != bd || int'(res_cost) != best))) begin
      failures++;
      $display("FAIL (%0d,%0d): found %b disp %0d cost %0d, exp %b %0d %0d", fx, fy, res_found, res_disp, res_cost, ok, bd, best);
    end
    if (ok) begin
      checks++;
      if (cyc != TW*TH + 2 + nd * (TW*TH + 2) + 1) begin
        failures++; $display("FAIL cycles %0d for %0d windows", cyc, nd);
      end
    end
  endtask

  initial begin
    int disp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      disp = 3 + t * 2;
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) L[r][c] = 5'($urandom);
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
        R[r][c] = (c + disp < W) ? 5'(L[r][c + disp] ^ 5'(($urandom % 8 == 0) ? 1 : 0)) : 5'($urandom);
      match(40, 5 + t);
      match(30, 8);
      match(12, 7);
    end
    match(2, 5);     // template leaves the frame
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
