// fp_recip: IEEE-754 double-precision reciprocal ("frecip" in the backend's
// floating point arithmetic unit). The paper names the unit; the method is this
// design's: restoring division of 1.0 by the 53-bit mantissa, one quotient bit per
// clock (55 bits), with the result truncated (not rounded). A zero or subnormal
// input, or a result that would be subnormal, returns zero.
// Interface: pulse in_valid with a while busy is low; busy stays high while the
// division runs and out_valid pulses for one clock with y, 57 clocks after
// in_valid.
module fp_recip (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] a,
  output logic        busy,
  output logic        out_valid,
  output logic [63:0] y
);
  import navion_pkg::*;

  localparam int unsigned NQ = 55;   // quotient bits: weight 2^0 down to 2^-54

  logic [54:0] rem_q;
  logic [52:0] div_q;
  logic [NQ-1:0] quo_q;
  logic [5:0]  cnt_q;
  logic        sgn_q, zero_q;
  logic [10:0] ex_q;

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("fp_recip: in_valid while busy");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; out_valid <= 1'b0; y <= '0;
      rem_q <= '0; div_q <= '0; quo_q <= '0; cnt_q <= '0;
      sgn_q <= 1'b0; zero_q <= 1'b0; ex_q <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !busy) begin
        busy   <= 1'b1;
        rem_q  <= {2'b01, 53'd0} >> 1;      // 1.0 on the divisor's scale (2^52)
        div_q  <= {1'b1, a[51:0]};
        quo_q  <= '0;
        cnt_q  <= '0;
        sgn_q  <= a[63];
        ex_q   <= a[62:52];
        zero_q <= (a[62:52] == 11'd0);
      end else if (busy) begin
        if (rem_q >= {2'b00, div_q}) begin
          rem_q <= (rem_q - {2'b00, div_q}) << 1;
          quo_q <= {quo_q[NQ-2:0], 1'b1};
        end else begin
          rem_q <= rem_q << 1;
          quo_q <= {quo_q[NQ-2:0], 1'b0};
        end
        cnt_q <= cnt_q + 6'd1;
        if (cnt_q == 6'(NQ)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          // quo_q holds NQ quotient bits, MSB has weight 2^0
          if (zero_q) y <= '0;
          else if (quo_q[NQ-1]) begin               // mantissa exactly 1.0
            if (ex_q >= 11'd2046) y <= {sgn_q, 63'h0};
            else y <= {sgn_q, 11'(11'd2046 - ex_q), 52'h0};
          end else begin
            if (ex_q >= 11'd2045) y <= {sgn_q, 63'h0};
            else y <= {sgn_q, 11'(11'd2045 - ex_q), quo_q[NQ-3:NQ-54]};
          end
        end
      end
    end
  end
endmodule
