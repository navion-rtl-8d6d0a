// be_regfile: shared register file of the backend, NREG (85) double-precision
// registers that the backend's state machines use as the fastest level of their
// memory hierarchy for intermediate values.
//
// The register count and the double-precision width follow the paper; the port
// structure is this design's choice: one write port and two read ports (A and
// B), enough to feed both operands of a two-input arithmetic unit every clock.
//
// Interface and timing: a write (we, waddr, wdata) takes effect at the clock
// edge. Reads are synchronous: ra_data / rb_data show the register addressed by
// ra_addr / rb_addr one clock earlier, as it was before a write in that same
// clock (read-before-write). Addresses of NREG and above read as zero and
// writes to them are dropped. Reset clears every register.
module be_regfile #(
  parameter int unsigned NREG = 85,
  localparam int unsigned AW  = $clog2(NREG)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic [AW-1:0] ra_addr,
  output logic [63:0]   ra_data,
  input  logic [AW-1:0] rb_addr,
  output logic [63:0]   rb_data
);
  logic [63:0] regs [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
      ra_data <= '0;
      rb_data <= '0;
    end else begin
      if (we && int'(waddr) < NREG) regs[waddr] <= wdata;
      ra_data <= int'(ra_addr) < NREG ? regs[ra_addr] : '0;
      rb_data <= int'(rb_addr) < NREG ? regs[rb_addr] : '0;
    end
  end
endmodule
