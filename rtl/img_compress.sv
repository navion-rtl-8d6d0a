// img_compress: block-wise lossy image compression of the vision frontend.
//
// Following the paper, every 8-bit input pixel is first truncated to 5 bits
// (pix[2:0] is read by nothing, by design),
// then the frame is cut into 4x4 blocks. For each block the minimum and maximum
// are found, a threshold halfway between them is computed, and each pixel is
// coded by one bit: pixel >= threshold. A block is stored as 26 bits (16 flags,
// 5-bit threshold, 5-bit minimum) instead of 128, a 4.9x smaller frame.
//
// Pixels arrive in raster order, one per clock with pix_valid. The first three
// rows of every block row are kept in a line buffer (3 rows x IMG_W x 5 bits =
// 1410 bytes, the paper's 1.4 kB). While the fourth row streams in, the three
// buffered pixels of the same column are read next to the incoming one, and a
// 4-column window of 4x4 pixels is assembled; when the fourth column of a block
// arrives the block is coded and presented, registered, one clock later on
// blk_valid / blk_addr / blk_word. blk_addr counts blocks in raster order;
// frame_done marks the last block of a frame, after which the next pixel starts
// a new frame.
//
// The paper fixes the 5-bit truncation, the 4x4 block, the halfway threshold and
// the 26-bit content. The comparison direction (>=), the floor in the threshold,
// the bit order of the word and the streaming interface are this design's.
module img_compress
  import navion_pkg::*;
#(
  parameter int unsigned IMG_W = 752,
  parameter int unsigned IMG_H = 480,
  localparam int unsigned NBLK = (IMG_W / BLK) * (IMG_H / BLK),
  localparam int unsigned XW   = $clog2(IMG_W),
  localparam int unsigned YW   = $clog2(IMG_H),
  localparam int unsigned BAW  = $clog2(NBLK)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           pix_valid,
  input  logic [7:0]     pix,
  output logic           blk_valid,
  output logic [BAW-1:0] blk_addr,
  output cblock_t        blk_word,
  output logic           frame_done
);
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic [PIX_BITS-1:0] lbuf [BLK-1][IMG_W];     // rows 0..2 of the current block row
  logic [PIX_BITS-1:0] win  [BLK][BLK];         // [row][col]; col 3 is the newest
  logic [PIX_BITS-1:0] p5;
  logic [1:0] yr, xr;

  assign p5 = pix[7:8-PIX_BITS];
  assign yr = y[1:0];
  assign xr = x[1:0];

  // line buffer
  always_ff @(posedge clk) begin
    if (pix_valid && yr != 2'd3) lbuf[yr][x] <= p5;
  end

  // column window: shift in the column {lbuf rows 0..2, incoming pixel}
  always_ff @(posedge clk) begin
    if (pix_valid && yr == 2'd3) begin
      for (int r = 0; r < BLK; r++)
        for (int c = 0; c < BLK - 1; c++) win[r][c] <= win[r][c+1];
      for (int r = 0; r < BLK - 1; r++) win[r][BLK-1] <= lbuf[r][x];
      win[BLK-1][BLK-1] <= p5;
    end
  end

  // block complete one clock after the 4th column entered the window
  logic blk_ready;
  logic [BAW-1:0] blk_cnt;
  logic last_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; blk_ready <= 1'b0; last_q <= 1'b0;
    end else begin
      blk_ready <= pix_valid && yr == 2'd3 && xr == 2'd3;
      last_q    <= pix_valid && int'(x) == IMG_W - 1 && int'(y) == IMG_H - 1;
      if (pix_valid) begin
        if (int'(x) == IMG_W - 1) begin
          x <= '0;
          y <= (int'(y) == IMG_H - 1) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  // code the block
  logic [PIX_BITS-1:0] mn, mx, thr;
  cblock_t code;
  always_comb begin
    mn = win[0][0];
    mx = win[0][0];
    for (int r = 0; r < BLK; r++)
      for (int c = 0; c < BLK; c++) begin
        if (win[r][c] < mn) mn = win[r][c];
        if (win[r][c] > mx) mx = win[r][c];
      end
    thr = PIX_BITS'(({1'b0, mn} + {1'b0, mx}) >> 1);
    code.mn  = mn;
    code.thr = thr;
    for (int r = 0; r < BLK; r++)
      for (int c = 0; c < BLK; c++) code.flags[r*BLK+c] = (win[r][c] >= thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk_valid <= 1'b0; blk_addr <= '0; blk_word <= '0; frame_done <= 1'b0; blk_cnt <= '0;
    end else begin
      blk_valid  <= blk_ready;
      frame_done <= blk_ready && last_q;
      if (blk_ready) begin
        blk_word <= code;
        blk_addr <= blk_cnt;
        blk_cnt  <= (int'(blk_cnt) == NBLK - 1) ? '0 : blk_cnt + 1'b1;
      end
    end
  end
endmodule
