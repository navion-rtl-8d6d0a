// frame_buffer: one compressed frame memory of the vision frontend. The paper's
// chip has four: Frame (1) and Frame (2) hold the incoming left frames for
// feature tracking, Left Frame and Right Frame the stereo pair for stereo
// matching; all four hold frames in the 26-bit-per-4x4-block format of
// img_compress, which makes them 4.9x smaller than 8-bit frames.
//
// Writes take whole compressed blocks (wr_addr in block raster order). Reads
// take a pixel position and return, one clock later, the reconstructed 5-bit
// pixel: the block is fetched, the pixel's flag selected, and a 0 flag gives the
// block minimum while a 1 flag gives 2*threshold - minimum (the block maximum to
// within one step), clamped to 31. The paper does not say how pixels are
// reconstructed; this rule, the single read and write port and the one-cycle
// latency are this design's.
module frame_buffer
  import navion_pkg::*;
#(
  parameter int unsigned IMG_W = 752,
  parameter int unsigned IMG_H = 480,
  localparam int unsigned BW   = IMG_W / BLK,
  localparam int unsigned NBLK = BW * (IMG_H / BLK),
  localparam int unsigned XW   = $clog2(IMG_W),
  localparam int unsigned YW   = $clog2(IMG_H),
  localparam int unsigned BAW  = $clog2(NBLK)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [BAW-1:0]      wr_addr,
  input  cblock_t             wr_word,
  input  logic                rd_en,
  input  logic [XW-1:0]       rd_x,
  input  logic [YW-1:0]       rd_y,
  output logic                rd_valid,
  output logic [PIX_BITS-1:0] rd_pix
);
  cblock_t mem [NBLK];
  cblock_t q;
  logic [3:0] sel_q;
  logic [BAW-1:0] raddr;

  assign raddr = BAW'(int'(rd_y) / BLK * BW + int'(rd_x) / BLK);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
    if (rd_en) begin
      q     <= mem[raddr];
      sel_q <= {rd_y[1:0], rd_x[1:0]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

  logic [PIX_BITS+1:0] hi;
  always_comb begin
    hi = {1'b0, q.thr, 1'b0} - {2'b00, q.mn};
    if (hi > (PIX_BITS+2)'(2**PIX_BITS - 1)) hi = (PIX_BITS+2)'(2**PIX_BITS - 1);
    rd_pix = q.flags[sel_q] ? hi[PIX_BITS-1:0] : q.mn;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   rd_en |-> (int'(rd_x) < IMG_W && int'(rd_y) < IMG_H))
    else $error("frame_buffer: read outside the frame");
endmodule
