// tb_img_compress: self-checking test of the block compressor on two 32x12
// frames of random pixels streamed back to back at one pixel per clock (with
// some idle clocks in the second frame). The testbench codes every 4x4 block
// itself (5-bit truncation, min, max, halfway threshold, pixel >= threshold) and
// compares the blocks that come out, their addresses and their count; the last
// block must be registered at the second clock edge after the edge that takes
// the last pixel, with frame_done.
module tb_img_compress;
  import navion_pkg::*;
  localparam int W = 32, H = 12, NB = (W / 4) * (H / 4);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_valid = 0;
  logic [7:0] pix = 0;
  logic blk_valid, frame_done;
  logic [$clog2(NB)-1:0] blk_addr;
  cblock_t blk_word;
  int checks = 0, failures = 0;

  img_compress #(.IMG_W(W), .IMG_H(H)) dut (.*);

  logic [7:0] img [2][H][W];
  cblock_t exp_blk [2][NB];
  int nout = 0, ndone = 0, last_pix_t = 0, done_t = 0, cyc = 0;

  always @(posedge clk) cyc++;

  function automatic cblock_t code_blk(int f, int by, int bx);
    cblock_t c;
    int mn, mx, t, p;
    mn = 99; mx = -1;
    for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++) begin
      p = img[f][by*4+r][bx*4+q] >> 3;
      if (p < mn) mn = p;
      if (p > mx) mx = p;
    end
    t = (mn + mx) / 2;
    c.mn = 5'(mn); c.thr = 5'(t);
    for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++)
      c.flags[r*4+q] = ((img[f][by*4+r][bx*4+q] >> 3) >= t);
    return c;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n && blk_valid) begin
    int f, a;
    f = nout / NB; a = nout % NB;
    checks++;
    if (f > 1 || blk_addr != a[$clog2(NB)-1:0] || blk_word != exp_blk[f][a]) begin
      failures++;
      if (failures < 10) $display("FAIL block %0d: addr %0d word %h exp %h", nout, blk_addr, blk_word, exp_blk[f%2][a]);
    end
    nout++;
    if (frame_done) begin ndone++; done_t = cyc; end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 2; f++) begin
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = 8'($urandom);
      for (int r = 0; r < 8; r++) img[f][r/4*4 + r%4][r] = 8'hFF;  // some full-range blocks
      for (int b = 0; b < NB; b++) exp_blk[f][b] = code_blk(f, b / (W/4), b % (W/4));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          if (f == 1 && c % 5 == 0) begin pix_valid = 0; @(negedge clk); end
          pix_valid = 1; pix = img[f][r][c];
          if (f == 1 && r == H - 1 && c == W - 1) last_pix_t = cyc;
        end
    @(negedge clk); pix_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 2 * NB || ndone != 2) begin failures++; $display("FAIL %0d blocks, %0d frame_done", nout, ndone); end
    checks++;
    if (done_t - last_pix_t != 3) begin failures++; $display("FAIL latency %0d", done_t - last_pix_t); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
