// stereo_match: stereo matching (SM) of the vision frontend. For a feature at
// (req_x, req_y) of the left frame it finds the horizontal shift (disparity) at
// which the right frame looks most like the left frame around the feature.
//
// Following the paper, the frames are rectified, so the search runs along the
// feature's own rows: a TW x TH template (51x5) centred on the feature is
// compared with windows of the right frame inside a RW x TH search region
// (421x5). The matching cost (sum of absolute differences), the search direction
// (the right-frame window centre moves left, disparity d = 0 .. RW-TW) and the
// serial schedule are this design's choices.
//
// Schedule: the template is read from the left frame buffer into registers (one
// pixel per clock, TW*TH clocks), then for every disparity the TW*TH right-frame
// pixels are read, one per clock, and their absolute differences accumulated;
// after each window the cost is compared with the best so far (ties keep the
// smaller disparity). Windows that would leave the frame end the search. Both
// frame ports have a one-cycle read latency (frame_buffer). From req_valid to
// res_valid a search takes (TW*TH+2)*(1+windows)+1 clocks; res_valid pulses
// with the result; res_found
// is low if the template or the first window does not fit in the frame.
module stereo_match
  import navion_pkg::*;
#(
  parameter int unsigned IMG_W = 752,
  parameter int unsigned IMG_H = 480,
  parameter int unsigned TW    = 51,
  parameter int unsigned TH    = 5,
  parameter int unsigned RW    = 421,
  localparam int unsigned XW   = $clog2(IMG_W),
  localparam int unsigned YW   = $clog2(IMG_H),
  localparam int unsigned DW   = $clog2(RW)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  input  logic [XW-1:0]       req_x,
  input  logic [YW-1:0]       req_y,
  output logic                busy,
  // left frame read port
  output logic                l_rd_en,
  output logic [XW-1:0]       l_rd_x,
  output logic [YW-1:0]       l_rd_y,
  input  logic                l_rd_valid,
  input  logic [PIX_BITS-1:0] l_rd_pix,
  // right frame read port
  output logic                r_rd_en,
  output logic [XW-1:0]       r_rd_x,
  output logic [YW-1:0]       r_rd_y,
  input  logic                r_rd_valid,
  input  logic [PIX_BITS-1:0] r_rd_pix,
  // result
  output logic                res_valid,
  output logic                res_found,
  output logic [DW-1:0]       res_disp,
  output logic [15:0]         res_cost
);
  typedef enum logic [2:0] {S_IDLE, S_TMPL, S_TMPL_W, S_WIN, S_WIN_W, S_CMP, S_RES} state_e;

  localparam int HX = TW / 2;
  localparam int HY = TH / 2;
  localparam int RRW = TH > 1 ? $clog2(TH) : 1;
  localparam int RCW = TW > 1 ? $clog2(TW) : 1;

  state_e st;
  logic [PIX_BITS-1:0] tmpl [TH][TW];
  int unsigned ri, ci;          // issue position inside the window
  logic [RRW-1:0] rd_r;         // position of the pixel arriving this clock
  logic [RCW-1:0] rd_c;
  int          fx, fy;          // feature
  int unsigned d;               // disparity under test
  logic [15:0] cost, best;
  logic [DW-1:0] best_d;
  logic        found;

  wire last_issue = (ri == TH - 1) && (ci == TW - 1);

  always_comb begin
    l_rd_en = (st == S_TMPL);
    r_rd_en = (st == S_WIN);
    l_rd_x  = XW'(fx - HX + int'(ci));
    l_rd_y  = YW'(fy - HY + int'(ri));
    r_rd_x  = XW'(fx - int'(d) - HX + int'(ci));
    r_rd_y  = YW'(fy - HY + int'(ri));
  end

  logic [PIX_BITS-1:0] tp;
  logic [PIX_BITS-1:0] ad;
  always_comb begin
    tp = tmpl[rd_r][rd_c];
    ad = (tp > r_rd_pix) ? tp - r_rd_pix : r_rd_pix - tp;
  end

  always_ff @(posedge clk) begin
    if (l_rd_valid) tmpl[rd_r][rd_c] <= l_rd_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ri <= 0; ci <= 0; rd_r <= '0; rd_c <= '0; fx <= 0; fy <= 0; d <= 0;
      cost <= '0; best <= '1; best_d <= '0; found <= 1'b0;
      res_valid <= 1'b0; res_found <= 1'b0; res_disp <= '0; res_cost <= '0;
    end else begin
      res_valid <= 1'b0;
      rd_r <= RRW'(ri); rd_c <= RCW'(ci);
      unique case (st)
        S_IDLE: if (req_valid) begin
          fx <= int'(req_x); fy <= int'(req_y);
          ri <= 0; ci <= 0; d <= 0; best <= '1; best_d <= '0; found <= 1'b0;
          if (int'(req_x) < HX || int'(req_x) + HX >= IMG_W ||
              int'(req_y) < HY || int'(req_y) + HY >= IMG_H) st <= S_RES;
          else st <= S_TMPL;
        end
        S_TMPL: begin
          if (last_issue) begin ri <= 0; ci <= 0; st <= S_TMPL_W; end
          else if (ci == TW - 1) begin ci <= 0; ri <= ri + 1; end
          else ci <= ci + 1;
        end
        S_TMPL_W: begin cost <= '0; st <= S_WIN; end
        S_WIN: begin
          if (r_rd_valid) cost <= cost + 16'(ad);
          if (last_issue) begin ri <= 0; ci <= 0; st <= S_WIN_W; end
          else if (ci == TW - 1) begin ci <= 0; ri <= ri + 1; end
          else ci <= ci + 1;
        end
        S_WIN_W: begin
          if (r_rd_valid) cost <= cost + 16'(ad);
          st <= S_CMP;
        end
        S_CMP: begin
          found <= 1'b1;
          if (cost < best) begin best <= cost; best_d <= DW'(d); end
          cost <= '0;
          // next window must stay inside the search region and the frame
          if (d + 1 > RW - TW || fx - int'(d) - 1 < HX) st <= S_RES;
          else begin d <= d + 1; st <= S_WIN; end
        end
        S_RES: begin
          res_valid <= 1'b1; res_found <= found; res_disp <= best_d; res_cost <= best;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
