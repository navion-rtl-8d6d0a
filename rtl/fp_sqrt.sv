// fp_sqrt: IEEE-754 double-precision square root ("fsqrt" in the backend's
// floating point arithmetic unit). The paper names the unit; the method is this
// design's: the digit-by-digit (restoring) integer square root of the mantissa
// shifted left by 52 or 53 bits so that the exponent becomes even, one result bit
// per clock over 53 clocks, truncated. Zero, subnormal and negative inputs return
// zero, so the sign bit of y is always 0.
// Interface: pulse in_valid with a while busy is low; out_valid pulses with y
// when the root is ready (55 clocks later).
module fp_sqrt (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] a,
  output logic        busy,
  output logic        out_valid,
  output logic [63:0] y
);
  localparam int unsigned NR = 53;   // result bits

  logic [105:0] rad_q;     // radicand, consumed two bits per step from the top
  logic [53:0]  rem_q;     // the partial remainder never needs more than 54 bits
  logic [52:0]  root_q;
  logic [5:0]   cnt_q;
  logic [10:0]  ex_q;
  logic         zero_q;

  logic [55:0]  rem_sh, trial;
  always_comb begin
    rem_sh = {rem_q, rad_q[105:104]};
    trial  = {1'b0, root_q, 2'b01};
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("fp_sqrt: in_valid while busy");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; out_valid <= 1'b0; y <= '0;
      rad_q <= '0; rem_q <= '0; root_q <= '0; cnt_q <= '0; ex_q <= '0; zero_q <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !busy) begin
        busy   <= 1'b1;
        rem_q  <= '0;
        root_q <= '0;
        cnt_q  <= '0;
        zero_q <= (a[62:52] == 11'd0) || a[63];
        // unbiased exponent even when the biased one is odd
        if (a[52]) begin
          rad_q <= {1'b0, 1'b1, a[51:0], 52'd0};
          ex_q  <= 11'((12'(a[62:52]) + 12'd1023) >> 1);
        end else begin
          rad_q <= {1'b1, a[51:0], 53'd0};
          ex_q  <= 11'((12'(a[62:52]) + 12'd1022) >> 1);
        end
      end else if (busy) begin
        if (cnt_q == 6'(NR)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          y         <= zero_q ? 64'h0 : {1'b0, ex_q, root_q[51:0]};
        end else begin
          rad_q <= rad_q << 2;
          if (rem_sh >= trial) begin
            rem_q  <= 54'(rem_sh - trial);
            root_q <= {root_q[51:0], 1'b1};
          end else begin
            rem_q  <= rem_sh[53:0];
            root_q <= {root_q[51:0], 1'b0};
          end
          cnt_q <= cnt_q + 6'd1;
        end
      end
    end
  end
endmodule
