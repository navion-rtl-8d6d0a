// tb_be_regfile: self-checking test of the backend register file at its full
// size (85 registers). After reset every register must read zero on both ports.
// Then 3000 clocks of random writes and reads on both ports, with addresses drawn
// from the whole 7-bit range so that out-of-range accesses occur, and with
// frequent reads of the register being written; every read is compared one clock
// later with a model that applies the write after the reads.
module tb_be_regfile;
  localparam int NREG = 85, AW = $clog2(NREG);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [AW-1:0] waddr = 0, ra_addr = 0, rb_addr = 0;
  logic [63:0] wdata = 0, ra_data, rb_data;
  int checks = 0, failures = 0, n_rw_same = 0, n_oor = 0;

  be_regfile #(.NREG(NREG)) dut (.*);

  logic [63:0] model [NREG];
  logic [63:0] exp_a, exp_b;

  task automatic cmp(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NREG; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NREG; i++) begin
      ra_addr = AW'(i); rb_addr = AW'(NREG - 1 - i);
      @(negedge clk);
      cmp("reset A", ra_data, 64'd0);
      cmp("reset B", rb_data, 64'd0);
    end
    for (int k = 0; k < 3000; k++) begin
      we = ($urandom % 4) != 0;
      waddr = AW'($urandom);
      wdata = {$urandom, $urandom};
      ra_addr = ($urandom % 3 == 0) ? waddr : AW'($urandom);
      rb_addr = ($urandom % 3 == 0) ? waddr : AW'($urandom);
      if (we && (ra_addr == waddr || rb_addr == waddr) && int'(waddr) < NREG) n_rw_same++;
      if (int'(ra_addr) >= NREG || int'(waddr) >= NREG) n_oor++;
      exp_a = int'(ra_addr) < NREG ? model[ra_addr] : '0;
      exp_b = int'(rb_addr) < NREG ? model[rb_addr] : '0;
      if (we && int'(waddr) < NREG) model[waddr] = wdata;
      @(negedge clk);
      cmp("port A", ra_data, exp_a);
      cmp("port B", rb_data, exp_b);
    end
    we = 0;
    $display("reads of the register being written %0d, out-of-range accesses %0d", n_rw_same, n_oor);
    checks++;
    if (n_rw_same == 0 || n_oor == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
