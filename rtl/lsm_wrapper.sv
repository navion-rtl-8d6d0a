// lsm_wrapper: the backend's linear solver matrix memory ("Linear Solver Matrix")
// together with its sparsity control unit.
//
// The matrix H of the backend's linear system is symmetric, NKF*BS square
// (20 keyframes x 15 state variables = 300), and its non-zero entries sit at
// fixed positions. Following the paper, only one triangle is stored and only the
// positions that can be non-zero: a request with (row, column) is first folded
// onto the upper triangle (row <= column), then either mapped onto the compact
// memory or masked: a masked read returns 0.0 and a masked write is dropped.
//
// The paper gives the idea and the outcome (about 38% of a triangle stored, a
// 134 kB memory) but not the exact pattern. This design assumes a keyframe block
// band: the 15x15 block of keyframes (a, b) is stored when |a-b| <= BAND. A band
// has no fill-in under Cholesky factorisation, so the factor can overwrite H in
// place. With BAND = 4 the memory holds 18150 of 45150 upper-triangle doubles
// (40.2%, 142 kB).
//
// Layout: row r of keyframe block kb stores its columns from r to the end of the
// band, hi(kb) = min(NKF, kb+BAND+1)*BS - 1. Rows follow one another, so with
// q = r mod BS and W = hi(kb) - kb*BS + 1 the address is
//   BASE[kb] + q*W - q*(q-1)/2 + (c - r),
// where BASE[kb], the start of each keyframe block, is computed at elaboration.
//
// Interface: one request per clock (req_valid, req_we, req_row, req_col,
// req_wdata); for every request rsp_valid follows one clock later with
// rsp_masked, and for reads rsp_rdata. The one-cycle latency is this design's
// choice.
module lsm_wrapper #(
  parameter int unsigned NKF  = 20,   // keyframes in the horizon
  parameter int unsigned BS   = 15,   // state variables per keyframe
  parameter int unsigned BAND = 4,    // stored keyframe-block band (assumed)
  localparam int unsigned N   = NKF * BS,
  localparam int unsigned IW  = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  input  logic          req_we,
  input  logic [IW-1:0] req_row,
  input  logic [IW-1:0] req_col,
  input  logic [63:0]   req_wdata,
  output logic          rsp_valid,
  output logic          rsp_masked,
  output logic [63:0]   rsp_rdata
);
  typedef int unsigned base_t [NKF];

  function automatic int unsigned blk_width(input int unsigned kb);
    int unsigned hb;
    hb = (kb + BAND + 1 < NKF) ? kb + BAND + 1 : NKF;
    return hb * BS - kb * BS;
  endfunction

  function automatic base_t calc_base();
    base_t b;
    int unsigned acc;
    acc = 0;
    for (int unsigned kb = 0; kb < NKF; kb++) begin
      b[kb] = acc;
      acc += BS * blk_width(kb) - BS * (BS - 1) / 2;
    end
    return b;
  endfunction

  function automatic int unsigned calc_depth();
    int unsigned acc;
    acc = 0;
    for (int unsigned kb = 0; kb < NKF; kb++)
      acc += BS * blk_width(kb) - BS * (BS - 1) / 2;
    return acc;
  endfunction

  localparam base_t       BASE  = calc_base();
  localparam int unsigned DEPTH = calc_depth();
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [63:0] mem [DEPTH];

  // ---- sparsity control: fold, test the band, map ----
  logic [IW-1:0] r, c;
  int unsigned   kb, q, w;
  logic          in_band;
  logic [AW-1:0] addr;

  always_comb begin
    if (req_row <= req_col) begin
      r = req_row; c = req_col;
    end else begin
      r = req_col; c = req_row;
    end
    kb      = int'(r) / BS;
    q       = int'(r) % BS;
    w       = blk_width(kb);
    in_band = (int'(c) < int'(kb * BS + w));
    addr    = AW'(BASE[kb] + q * w - (q * (q - 1)) / 2 + (int'(c) - int'(r)));
  end

  always_ff @(posedge clk) begin
    if (req_valid && req_we && in_band) mem[addr] <= req_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid  <= 1'b0;
      rsp_masked <= 1'b0;
      rsp_rdata  <= '0;
    end else begin
      rsp_valid  <= req_valid;
      rsp_masked <= req_valid && !in_band;
      if (req_valid && !req_we) rsp_rdata <= in_band ? mem[addr] : 64'h0;
    end
  end

  // requests stay inside the matrix
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid |-> (int'(req_row) < N && int'(req_col) < N))
    else $error("lsm_wrapper: index out of range");
endmodule
