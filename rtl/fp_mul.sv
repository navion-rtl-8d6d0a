// fp_mul: IEEE-754 double-precision multiplier ("fmult" in the backend's floating
// point arithmetic unit). The paper names the unit and fixes double precision;
// the structure is this design's: a 53x53-bit mantissa product, a one-bit
// normalisation and round-to-nearest-even. Subnormals are flushed to zero and an
// exponent overflow returns infinity.
// Interface: a and b with in_valid; y and out_valid one clock later, one
// operation per cycle.
module fp_mul (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic        out_valid,
  output logic [63:0] y
);
  import navion_pkg::*;

  function automatic logic [63:0] mul64(input logic [63:0] x, input logic [63:0] z);
    f64_t  fx, fz;
    logic  s;
    logic [105:0] p;
    logic [52:0]  n;
    logic         g, st, ru;
    logic [53:0]  mr;
    logic signed [13:0] e;
    fx = f64_t'(x);
    fz = f64_t'(z);
    s  = fx.s ^ fz.s;
    if (fx.e == 11'd0 || fz.e == 11'd0) return {s, 63'h0};
    p = {1'b1, fx.m} * {1'b1, fz.m};
    if (p[105]) begin
      n = p[105:53]; g = p[52]; st = |p[51:0];
      e = 14'(fx.e) + 14'(fz.e) - 14'sd1022;
    end else begin
      n = p[104:52]; g = p[51]; st = |p[50:0];
      e = 14'(fx.e) + 14'(fz.e) - 14'sd1023;
    end
    ru = g & (st | n[0]);
    mr = {1'b0, n} + {53'd0, ru};
    if (mr[53]) begin
      mr = mr >> 1;
      e  = e + 14'sd1;
    end
    if (e <= 14'sd0) return {s, 63'h0};
    if (e >= 14'sd2047) return {s, 11'h7FF, 52'h0};
    return {s, e[10:0], mr[51:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= mul64(a, b);
    end
  end
endmodule
