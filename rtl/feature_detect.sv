// feature_detect: feature detection (FD) of the vision frontend: Shi-Tomasi
// corners, one per grid cell.
//
// Following the paper, FD works on the uncompressed left frame (the compressed
// frames are kept for tracking and stereo only) and detects features on a grid
// so that every region of a keyframe keeps features. For each pixel the
// Shi-Tomasi score is the smaller eigenvalue of the 2x2 gradient structure
// tensor; each cell reports its best-scoring pixel if that score reaches the
// programmable min_score.
//
// Datapath (this design's choices where the paper is silent): pixels stream in
// raster order, one per clock. Four line buffers and a 5x5 pixel window give,
// for the centre pixel, central-difference gradients Ix = p(x+1)-p(x-1) and
// Iy = p(y+1)-p(y-1) at the 3x3 positions around it; their sums
// a = sum Ix^2, b = sum Ix*Iy, c = sum Iy^2 give the score
//   s = (a + c) - isqrt((a - c)^2 + 4 b^2)      (twice the smaller eigenvalue).
// Pixels closer than two to the frame border score 0. The window centre lags the
// input by two rows and two columns. A cell (CELL_W x CELL_H) is reported when
// its last visited centre has been scored: feat_valid, feat_x/feat_y,
// feat_score, three clocks after the input pixel that completes it. Within a
// cell the first pixel with the highest score wins. The last two columns and
// rows are never window centres, so the cells are those covering centres
// 0 .. IMG_W-3 by 0 .. IMG_H-3: 50 x 32 = 1600 cells of 15 x 15 at 752 x 480.
// The cell size is taken from the 15 x 15 cell size the chip lists among its
// tracking parameters; the paper does not say how cells and detection relate
// beyond one grid for both.
module feature_detect #(
  parameter int unsigned IMG_W  = 752,
  parameter int unsigned IMG_H  = 480,
  parameter int unsigned CELL_W = 15,
  parameter int unsigned CELL_H = 15,
  localparam int unsigned XW    = $clog2(IMG_W),
  localparam int unsigned YW    = $clog2(IMG_H),
  localparam int unsigned NCX   = (IMG_W - 3) / CELL_W + 1,
  localparam int unsigned CXW   = NCX > 1 ? $clog2(NCX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pix_valid,
  input  logic [7:0]    pix,
  input  logic [20:0]   min_score,
  output logic          feat_valid,
  output logic [XW-1:0] feat_x,
  output logic [YW-1:0] feat_y,
  output logic [20:0]   feat_score
);
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic [7:0] lb  [4][IMG_W];   // previous four rows, row r kept at lb[r mod 4]
  logic [7:0] win [5][5];       // [row][col], row 4 / col 4 newest

  // ---- input counters, line buffers and window ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0;
    end else if (pix_valid) begin
      if (int'(x) == IMG_W - 1) begin
        x <= '0;
        y <= (int'(y) == IMG_H - 1) ? '0 : y + 1'b1;
      end else x <= x + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (pix_valid) begin
      lb[y[1:0]][x] <= pix;
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 4; c++) win[r][c] <= win[r][c+1];
      for (int r = 0; r < 4; r++) win[r][4] <= lb[2'(y[1:0] + 2'(r))][x];   // rows y-4 .. y-1
      win[4][4] <= pix;
    end
  end

  // window centre of the pixel just shifted in
  logic          s1_v;
  int            s1_cx, s1_cy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_cx <= 0; s1_cy <= 0;
    end else begin
      s1_v  <= pix_valid && x >= 2 && y >= 2;
      s1_cx <= int'(x) - 2;
      s1_cy <= int'(y) - 2;
    end
  end

  // ---- Shi-Tomasi score ----
  function automatic logic [20:0] isqrt42(input logic [41:0] v);
    logic [41:0] rem, trial;
    logic [20:0] root;
    rem = '0; root = '0;
    for (int i = 20; i >= 0; i--) begin
      rem   = {rem[39:0], v[2*i+1 -: 2]};
      trial = {19'd0, root, 2'b01};
      if (rem >= trial) begin rem = rem - trial; root = {root[19:0], 1'b1}; end
      else root = {root[19:0], 1'b0};
    end
    return root;
  endfunction

  logic [20:0] score;
  always_comb begin
    logic signed [9:0]  gx, gy;
    logic signed [22:0] a, b, c;
    logic signed [41:0] d42, b42;
    logic [41:0] q;
    a = '0; b = '0; c = '0;
    for (int r = 1; r <= 3; r++)
      for (int k = 1; k <= 3; k++) begin
        gx = 10'(signed'({2'b00, win[r][k+1]}) - signed'({2'b00, win[r][k-1]}));
        gy = 10'(signed'({2'b00, win[r+1][k]}) - signed'({2'b00, win[r-1][k]}));
        a = a + 23'(gx * gx);
        b = b + 23'(gx * gy);
        c = c + 23'(gy * gy);
      end
    d42 = 42'(a) - 42'(c);
    b42 = 42'(b);
    q = unsigned'(d42 * d42 + 42'sd4 * b42 * b42);
    score = 21'(a + c - 23'(isqrt42(q)));
    if (s1_cx < 2 || s1_cx > IMG_W - 3 || s1_cy < 2 || s1_cy > IMG_H - 3) score = '0;
  end

  logic          s2_v;
  int            s2_cx, s2_cy;
  logic [20:0]   s2_score;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_cx <= 0; s2_cy <= 0; s2_score <= '0;
    end else begin
      s2_v <= s1_v; s2_cx <= s1_cx; s2_cy <= s1_cy; s2_score <= score;
    end
  end

  // ---- grid: best pixel per cell of the current cell row ----
  logic [20:0]   best_s [NCX];
  logic [XW-1:0] best_x [NCX];
  logic [YW-1:0] best_y [NCX];
  logic          best_v [NCX];

  logic [CXW-1:0] cidx;
  logic        better, last_col, last_row;
  always_comb begin
    cidx     = CXW'(unsigned'(s2_cx) / CELL_W);
    better   = !best_v[cidx] || s2_score > best_s[cidx];
    last_col = (unsigned'(s2_cx) % CELL_W == CELL_W - 1) || (s2_cx == IMG_W - 3);
    last_row = (unsigned'(s2_cy) % CELL_H == CELL_H - 1) || (s2_cy == IMG_H - 3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCX; i++) best_v[i] <= 1'b0;
      feat_valid <= 1'b0; feat_x <= '0; feat_y <= '0; feat_score <= '0;
    end else begin
      feat_valid <= 1'b0;
      if (s2_v) begin
        if (last_col && last_row) begin
          // cell complete: report its best and clear the entry
          best_v[cidx] <= 1'b0;
          feat_x     <= better ? XW'(s2_cx) : best_x[cidx];
          feat_y     <= better ? YW'(s2_cy) : best_y[cidx];
          feat_score <= better ? s2_score : best_s[cidx];
          feat_valid <= (better ? s2_score : best_s[cidx]) >= min_score;
        end else if (better) begin
          best_v[cidx] <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s2_v && better) begin
      best_s[cidx] <= s2_score;
      best_x[cidx] <= XW'(s2_cx);
      best_y[cidx] <= YW'(s2_cy);
    end
  end
endmodule
