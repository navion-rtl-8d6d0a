// tb_factor_graph_mem: self-checking test of the two-stage feature track memory
// at a reduced size (20 tracks x 4 slots, 16 dense entries, 5-bit pointers).
// A reference model (an array of optional observations per slot) follows a
// random mix of writes, track deletions and reads, including writes while the
// dense memory is full. Every read must return the model's observation or a
// miss, two clocks after the request; wr_fail must pulse exactly when a new
// observation finds no free entry; n_used must match the model's count.
module tb_factor_graph_mem;
  import navion_pkg::*;
  localparam int TR = 20, AGE = 4, OBS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic busy, full, wr_fail, rd_valid, rd_hit;
  logic [5:0] n_used;
  logic wr_en = 0, del_en = 0, rd_en = 0;
  logic [4:0] wr_track = 0, del_track = 0, rd_track = 0;
  logic [1:0] wr_slot = 0, rd_slot = 0;
  obs_t wr_obs = '0, rd_obs;
  int checks = 0, failures = 0;

  factor_graph_mem #(.TRACKS(TR), .AGE(AGE), .OBS(OBS), .PTR_W(5)) dut (.*);

  bit   mv [TR][AGE];
  obs_t mo [TR][AGE];
  int   used = 0, nfail = 0, ndel = 0, nhit = 0;

  function automatic obs_t robs();
    return {5'($urandom), 32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, s, op;
    bit expfail;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);
    for (int i = 0; i < 1500; i++) begin
      t = $urandom % TR; s = $urandom % AGE; op = $urandom % 10;
      if (i > 400 && i < 600) op = 0;           // fill it up
      if (op < 4) begin
        obs_t o;
        o = robs();
        expfail = !mv[t][s] && used == OBS;
        wr_en = 1; wr_track = 5'(t); wr_slot = 2'(s); wr_obs = o;
        @(negedge clk); wr_en = 0;
        @(negedge clk);
        checks++;
        if (wr_fail != expfail) begin failures++; $display("FAIL wr_fail %b exp %b", wr_fail, expfail); end
        if (!expfail) begin
          if (!mv[t][s]) used++;
          mv[t][s] = 1; mo[t][s] = o;
        end else nfail++;
      end else if (op < 5) begin
        del_en = 1; del_track = 5'(t);
        @(negedge clk); del_en = 0;
        while (busy) @(negedge clk);
        for (int k = 0; k < AGE; k++) if (mv[t][k]) begin mv[t][k] = 0; used--; end
        ndel++;
      end else begin
        rd_en = 1; rd_track = 5'(t); rd_slot = 2'(s);
        @(negedge clk); rd_en = 0;
        @(negedge clk);
        checks++;
        if (!rd_valid || rd_hit != mv[t][s] || (mv[t][s] && rd_obs != mo[t][s])) begin
          failures++;
          if (failures < 10) $display("FAIL read %0d/%0d hit %b exp %b", t, s, rd_hit, mv[t][s]);
        end
        if (rd_hit) nhit++;
      end
      checks++;
      if (int'(n_used) != used || full != (used == OBS)) begin
        failures++;
        if (failures < 10) $display("FAIL n_used %0d exp %0d", n_used, used);
      end
    end
    $display("writes refused %0d, deletions %0d, read hits %0d", nfail, ndel, nhit);
    checks++;
    if (nfail == 0 || ndel == 0 || nhit == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
