// tb_lsm_wrapper: self-checking test of the linear solver matrix memory at its
// default size (300x300, keyframe band 4). Every (row, column) of the full
// matrix is written with a value unique to its position, lower triangle last, so
// that a folded position holds the lower-triangle write. Every position is then
// read back: positions inside the band must return the value of their folded
// (upper) position, positions outside must read 0.0 and be flagged masked. The
// number of stored entries (18150) is counted independently.
module tb_lsm_wrapper;
  localparam int NKF = 20, BS = 15, BAND = 4, N = NKF * BS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_we = 0;
  logic [8:0] req_row = 0, req_col = 0;
  logic [63:0] req_wdata = 0;
  logic rsp_valid, rsp_masked;
  logic [63:0] rsp_rdata;
  int checks = 0, failures = 0;

  lsm_wrapper dut (.*);

  function automatic bit in_band(int r, int c);
    int a, b;
    a = r / BS; b = c / BS;
    return (a > b ? a - b : b - a) <= BAND;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stored, nmask;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pass 0: upper triangle incl. diagonal, pass 1: lower triangle
    for (int p = 0; p < 2; p++)
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          if ((p == 0) == (r <= c)) begin
            @(negedge clk);
            req_valid = 1; req_we = 1; req_row = 9'(r); req_col = 9'(c);
            req_wdata = {32'(r), 32'(c)};
          end
    @(negedge clk); req_valid = 0;
    stored = 0; nmask = 0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        req_valid = 1; req_we = 0; req_row = 9'(r); req_col = 9'(c);
        @(negedge clk);
        req_valid = 0;
        checks++;
        if (in_band(r, c)) begin
          // folded position (min,max) was last written by the lower-triangle pass
          // unless it is on the diagonal
          logic [63:0] e;
          int lo, hi;
          lo = r < c ? r : c; hi = r < c ? c : r;
          e = (lo == hi) ? {32'(lo), 32'(lo)} : {32'(hi), 32'(lo)};
          if (r <= c) stored++;
          if (!rsp_valid || rsp_masked || rsp_rdata != e) begin
            failures++;
            if (failures < 10) $display("FAIL (%0d,%0d) got %h exp %h m=%b", r, c, rsp_rdata, e, rsp_masked);
          end
        end else begin
          nmask++;
          if (!rsp_valid || !rsp_masked || rsp_rdata != 64'h0) begin
            failures++;
            if (failures < 10) $display("FAIL masked (%0d,%0d) got %h", r, c, rsp_rdata);
          end
        end
      end
    checks++;
    if (stored != 18150) begin failures++; $display("FAIL stored %0d", stored); end
    $display("stored upper entries %0d of %0d (%0d%%), masked reads %0d", stored, N*(N+1)/2, stored*100/(N*(N+1)/2), nmask);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
