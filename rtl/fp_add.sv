// fp_add: IEEE-754 double-precision adder/subtractor of the backend's floating
// point arithmetic unit ("fadd/fsub" and "fadd" in the Navion block diagram).
// The paper names the unit and states that the backend works in double precision;
// everything inside is this design's own choice: the operands are aligned with
// three guard bits (guard, round, sticky), added or subtracted, renormalised with a
// leading-zero count and rounded to nearest-even. Subnormal operands and results
// are flushed to zero; infinities and NaNs are not produced or recognised.
// Interface: drive a, b and sub (1 = a-b) with in_valid; y is registered and
// out_valid follows one clock later. Any number of operations may be in flight,
// one per cycle.
module fp_add (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] a,
  input  logic [63:0] b,
  input  logic        sub,
  output logic        out_valid,
  output logic [63:0] y
);
  import navion_pkg::*;

  function automatic logic [63:0] add64(input logic [63:0] x, input logic [63:0] z, input logic negz);
    f64_t fx, fz, big, sml;
    logic        sz;
    logic [55:0] ma, mb;       // 1.m with 3 extra low bits
    logic [56:0] s;
    logic [11:0] d;
    logic        sticky;
    logic signed [13:0] e;
    logic [53:0] mr;
    int          lz;
    logic        ru;
    fx = f64_t'(x);
    fz = f64_t'(z);
    sz = fz.s ^ negz;
    if (fx.e == 11'd0 && fz.e == 11'd0) return 64'h0;
    if (fz.e == 11'd0) return {fx.s, fx.e, fx.m};
    if (fx.e == 11'd0) return {sz, fz.e, fz.m};
    // order by magnitude
    if ({fx.e, fx.m} >= {fz.e, fz.m}) begin
      big = fx; sml = '{s: sz, e: fz.e, m: fz.m};
    end else begin
      big = '{s: sz, e: fz.e, m: fz.m}; sml = fx;
    end
    d  = {1'b0, big.e} - {1'b0, sml.e};
    ma = {1'b1, big.m, 3'b000};
    mb = {1'b1, sml.m, 3'b000};
    if (d >= 12'd56) begin
      sticky = 1'b1;
      mb = '0;
    end else begin
      sticky = 1'b0;
      for (int i = 0; i < 56; i++)
        if (i < int'(d) && mb[i]) sticky = 1'b1;
      mb = mb >> d;
    end
    mb[0] = mb[0] | sticky;
    e = 14'(big.e);
    if (big.s == sml.s) begin
      s = {1'b0, ma} + {1'b0, mb};
      if (s[56]) begin
        s = {1'b0, s[56:2], s[1] | s[0]};
        e = e + 14'sd1;
      end
    end else begin
      s = {1'b0, ma} - {1'b0, mb};
      if (s == '0) return 64'h0;
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (s[i]) break;
        lz++;
      end
      s = s << lz;
      e = e - 14'(lz);
    end
    // s[55] is the hidden bit, s[54:3] mantissa, s[2] guard, s[1:0] round/sticky
    ru = s[2] & (s[1] | s[0] | s[3]);
    mr = {1'b0, s[55:3]} + {53'd0, ru};
    if (mr[53]) begin
      mr = mr >> 1;
      e = e + 14'sd1;
    end
    if (e <= 14'sd0) return {big.s, 63'h0};
    if (e >= 14'sd2047) return {big.s, 11'h7FF, 52'h0};
    return {big.s, e[10:0], mr[51:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= add64(a, b, sub);
    end
  end
endmodule
