// fp_trig: double-precision sine and cosine ("ftrig" in the backend's floating
// point arithmetic unit), as needed by the Rodrigues rotation formula.
//
// The paper only names the unit; everything inside is this design's choice.
// The angle a (IEEE double, |a| <= pi is the supported range) is converted to
// signed fixed point with 60 fraction bits. Angles beyond +-pi/2 are moved by
// -+pi and the results negated, which keeps the CORDIC in its convergence range.
// A rotation-mode CORDIC then runs NIT = 60 iterations, one per clock, starting
// from (K, 0) with K the CORDIC gain, so that it ends at (cos a, sin a). The
// arctangent table and K are computed at elaboration with real arithmetic. The
// two results are converted back to doubles (truncated). The absolute error
// stays below 1e-15; inputs outside |a| <= pi give undefined results.
//
// Interface: pulse in_valid with a while busy is low; out_valid pulses for one
// clock with sin_y and cos_y NIT + 1 clocks after the edge that takes in_valid.
module fp_trig #(
  parameter int unsigned NIT = 60
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] a,
  output logic        busy,
  output logic        out_valid,
  output logic [63:0] sin_y,
  output logic [63:0] cos_y
);
  localparam int FB = 60;   // fraction bits of the fixed-point datapath
  localparam int TW = NIT > 1 ? $clog2(NIT) : 1;

  // arctan(x) by its power series, for 0 < x <= 1/2
  function automatic real atan_s(input real x);
    real t, sum;
    t = x; sum = 0.0;
    for (int k = 0; k < 80; k++) begin
      sum = sum + ((k % 2 == 0) ? t : -t) / real'(2 * k + 1);
      t = t * x * x;
    end
    return sum;
  endfunction

  function automatic longint fix(input real v);
    real s;
    s = v;
    for (int k = 0; k < FB; k++) s = s * 2.0;
    return longint'(s);
  endfunction

  typedef longint atan_tab_t [NIT];
  function automatic atan_tab_t mk_atan();
    atan_tab_t t;
    real p;
    p = 1.0;
    for (int i = 0; i < NIT; i++) begin
      t[i] = (i == 0) ? fix(0.78539816339744830962) : fix(atan_s(p));
      p = p * 0.5;
    end
    return t;
  endfunction

  function automatic longint mk_gain();
    real k, p;
    k = 1.0; p = 1.0;
    for (int i = 0; i < NIT; i++) begin
      k = k * (1.0 / $sqrt(1.0 + p));
      p = p * 0.25;
    end
    return fix(k);
  endfunction

  localparam atan_tab_t ATAN = mk_atan();
  localparam longint     GAIN = mk_gain();
  localparam longint     PI_F = 64'sd3622009729038561421;    // pi * 2^60, rounded
  localparam longint     HPI_F = 64'sd1811004864519280711;   // pi/2 * 2^60, rounded

  // double -> fixed point (|v| < 4 assumed), truncating
  function automatic longint d2fix(input logic [63:0] d);
    int  sh;
    logic [127:0] m;
    longint r;
    if (d[62:52] == 11'd0) return 0;
    sh = int'(d[62:52]) - 1023 + FB - 52;            // shift of the 53-bit mantissa
    m = {75'd0, 1'b1, d[51:0]};
    if (sh >= 0) m = m << sh;
    else if (sh > -128) m = m >> (-sh);
    else m = '0;
    r = longint'(m[63:0]);
    return d[63] ? -r : r;
  endfunction

  // fixed point -> double, truncating
  function automatic logic [63:0] fix2d(input longint v);
    logic        s;
    logic [63:0] m;
    int          p;
    s = v < 0;
    m = s ? 64'(-v) : 64'(v);
    if (m == 0) return 64'd0;
    p = 63;
    for (int i = 0; i < 64; i++) if (m[i]) p = i;     // highest set bit
    m = m << (63 - p);                                // leading one to bit 63
    return {s, 11'(1023 + p - FB), m[62:11]};
  endfunction

  longint x_q, y_q, z_q;
  logic   neg_q;
  logic [6:0] it_q;
  logic   fin_q;

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("fp_trig: in_valid while busy");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; out_valid <= 1'b0; sin_y <= '0; cos_y <= '0;
      x_q <= 0; y_q <= 0; z_q <= 0; neg_q <= 1'b0; it_q <= '0; fin_q <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      fin_q <= 1'b0;
      if (in_valid && !busy) begin
        longint z;
        z = d2fix(a);
        busy <= 1'b1;
        neg_q <= 1'b0;
        if (z > HPI_F)       begin z = z - PI_F; neg_q <= 1'b1; end
        else if (z < -HPI_F) begin z = z + PI_F; neg_q <= 1'b1; end
        x_q <= GAIN; y_q <= 0; z_q <= z; it_q <= '0;
      end else if (busy && !fin_q && int'(it_q) < NIT) begin
        if (z_q >= 0) begin
          x_q <= x_q - (y_q >>> it_q);
          y_q <= y_q + (x_q >>> it_q);
          z_q <= z_q - ATAN[TW'(it_q)];
        end else begin
          x_q <= x_q + (y_q >>> it_q);
          y_q <= y_q - (x_q >>> it_q);
          z_q <= z_q + ATAN[TW'(it_q)];
        end
        it_q <= it_q + 7'd1;
        if (int'(it_q) == NIT - 1) fin_q <= 1'b1;
      end else if (fin_q) begin
        busy <= 1'b0;
        out_valid <= 1'b1;
        sin_y <= fix2d(neg_q ? -y_q : y_q);
        cos_y <= fix2d(neg_q ? -x_q : x_q);
      end
    end
  end
endmodule
