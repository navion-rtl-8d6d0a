// tb_feature_detect: self-checking test of the grid Shi-Tomasi detector on two
// 41x24 frames (8x8 cells) of random texture with a few bright squares. The
// testbench computes every pixel's score with its own integer arithmetic
// (central-difference gradients, 3x3 structure tensor, (a+c) - isqrt((a-c)^2 +
// 4b^2), zero within two pixels of the border), picks each cell's first maximum
// and compares the reported features (position, score, and only cells at or
// above min_score) and their number. It also checks that each cell's feature is
// reported three clocks after the pixel that completes it.
module tb_feature_detect;
  localparam int W = 41, H = 24, CW = 8, CH = 8, NCX = (W - 3) / CW + 1, NCY = (H - 3) / CH + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_valid = 0;
  logic [7:0] pix = 0;
  logic [20:0] min_score;
  logic feat_valid;
  logic [5:0] feat_x;
  logic [4:0] feat_y;
  logic [20:0] feat_score;
  int checks = 0, failures = 0;

  feature_detect #(.IMG_W(W), .IMG_H(H), .CELL_W(CW), .CELL_H(CH)) dut (.*);

  int img [H][W];
  longint sc [H][W];
  int ex_x [NCY][NCX], ex_y [NCY][NCX];
  longint ex_s [NCY][NCX];
  int got [NCY][NCX];
  int nfeat = 0, cyc = 0, late = 0;
  int pix_t [H][W];

  always @(posedge clk) cyc++;

  function automatic longint isqrt(longint v);
    longint r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic void reference();
    for (int v = 0; v < H; v++) for (int u = 0; u < W; u++) begin
      longint a, b, c;
      a = 0; b = 0; c = 0;
      if (u < 2 || u > W - 3 || v < 2 || v > H - 3) begin sc[v][u] = 0; continue; end
      for (int dv = -1; dv <= 1; dv++) for (int du = -1; du <= 1; du++) begin
        longint gx, gy;
        gx = img[v+dv][u+du+1] - img[v+dv][u+du-1];
        gy = img[v+dv+1][u+du] - img[v+dv-1][u+du];
        a += gx * gx; b += gx * gy; c += gy * gy;
      end
      sc[v][u] = a + c - isqrt((a - c) * (a - c) + 4 * b * b);
    end
    for (int cy = 0; cy < NCY; cy++) for (int cx = 0; cx < NCX; cx++) begin
      ex_s[cy][cx] = -1;
      for (int v = cy * CH; v < (cy + 1) * CH && v <= H - 3; v++)
        for (int u = cx * CW; u < (cx + 1) * CW && u <= W - 3; u++)
          if (sc[v][u] > ex_s[cy][cx]) begin ex_s[cy][cx] = sc[v][u]; ex_x[cy][cx] = u; ex_y[cy][cx] = v; end
    end
  endfunction

  always @(posedge clk) if (feat_valid) begin
    int cx, cy, lu, lv;
    cx = feat_x / CW; cy = feat_y / CH;
    nfeat++;
    got[cy][cx]++;
    checks++;
    if (int'(feat_x) != ex_x[cy][cx] || int'(feat_y) != ex_y[cy][cx] || longint'(feat_score) != ex_s[cy][cx]
        || longint'(feat_score) < longint'(min_score)) begin
      failures++;
      if (failures < 10) $display("FAIL cell %0d,%0d: (%0d,%0d) %0d exp (%0d,%0d) %0d", cx, cy, feat_x, feat_y, feat_score,
                                  ex_x[cy][cx], ex_y[cy][cx], ex_s[cy][cx]);
    end
    // the pixel completing the cell is two rows and two columns past its last centre
    lu = ((cx + 1) * CW - 1 > W - 3 ? W - 3 : (cx + 1) * CW - 1) + 2;
    lv = ((cy + 1) * CH - 1 > H - 3 ? H - 3 : (cy + 1) * CH - 1) + 2;
    checks++;
    if (cyc - pix_t[lv][lu] != 4) begin
      failures++; late++;
      if (late < 4) $display("FAIL latency %0d", cyc - pix_t[lv][lu]);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expn;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int v = 0; v < H; v++) for (int u = 0; u < W; u++) img[v][u] = $urandom % 40;
      for (int k = 0; k < 6; k++) begin
        int u0, v0;
        u0 = $urandom % (W - 6); v0 = $urandom % (H - 6);
        for (int v = v0; v < v0 + 5; v++) for (int u = u0; u < u0 + 5; u++) img[v][u] = 200 + $urandom % 50;
      end
      reference();
      min_score = (f == 0) ? 21'd0 : 21'(ex_s[1][2]);
      expn = 0;
      for (int cy = 0; cy < NCY; cy++) for (int cx = 0; cx < NCX; cx++) begin
        got[cy][cx] = 0;
        if (ex_s[cy][cx] >= longint'(min_score)) expn++;
      end
      nfeat = 0;
      for (int v = 0; v < H; v++) for (int u = 0; u < W; u++) begin
        @(negedge clk);
        pix_valid = 1; pix = 8'(img[v][u]);
        pix_t[v][u] = cyc;
      end
      @(negedge clk); pix_valid = 0;
      repeat (6) @(negedge clk);
      checks++;
      if (nfeat != expn) begin failures++; $display("FAIL frame %0d: %0d features, expected %0d", f, nfeat, expn); end
      $display("frame %0d: %0d features of %0d cells", f, nfeat, NCX * NCY);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
