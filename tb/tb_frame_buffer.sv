// tb_frame_buffer: self-checking test of a compressed frame memory (64x16
// frame). Random block words are written to every block address; then random
// pixel positions (and every pixel of one block) are read back and compared,
// one clock after the request, with the reconstruction worked out here: flag 0
// gives the block minimum, flag 1 gives min(31, 2*threshold - minimum).
module tb_frame_buffer;
  import navion_pkg::*;
  localparam int W = 64, H = 16, NB = (W / 4) * (H / 4);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [$clog2(NB)-1:0] wr_addr = 0;
  cblock_t wr_word = 0;
  logic [$clog2(W)-1:0] rd_x = 0;
  logic [$clog2(H)-1:0] rd_y = 0;
  logic [4:0] rd_pix;
  int checks = 0, failures = 0;

  frame_buffer #(.IMG_W(W), .IMG_H(H)) dut (.*);

  cblock_t blocks [NB];

  function automatic int recon(int x, int y);
    cblock_t b;
    int hi;
    b = blocks[(y / 4) * (W / 4) + x / 4];
    hi = 2 * int'(b.thr) - int'(b.mn);
    if (hi > 31) hi = 31;
    return b.flags[(y % 4) * 4 + x % 4] ? hi : int'(b.mn);
  endfunction

  task automatic rd(int x, int y);
    @(negedge clk);
    rd_en = 1; rd_x = 6'(x); rd_y = 4'(y);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (!rd_valid || int'(rd_pix) != recon(x, y)) begin
      failures++;
      if (failures < 10) $display("FAIL (%0d,%0d) got %0d exp %0d", x, y, rd_pix, recon(x, y));
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      int mn, mx;
      mn = $urandom % 32; mx = mn + $urandom % (32 - mn);
      blocks[b].mn = 5'(mn); blocks[b].thr = 5'((mn + mx) / 2); blocks[b].flags = 16'($urandom);
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(b); wr_word = blocks[b];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 16; i++) rd(20 + i % 4, 8 + i / 4);
    for (int i = 0; i < 1000; i++) rd($urandom % W, $urandom % H);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
