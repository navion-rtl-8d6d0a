// tb_track_data_mem: self-checking test of the Tracking Data memory with
// MAXF = 12. A queue models the dense feature list. The test appends until the
// list is full (and one more, which must be refused), then runs random
// updates, removals, reads, appends and out-of-range accesses, and finally
// empties the list by removing entry 0 repeatedly. Every response (ok flag and
// read data) and the count are compared with the model.
module tb_track_data_mem;
  localparam int MAXF = 12, ID_W = 12, POS_W = 16, EW = ID_W + 2 * POS_W, IXW = $clog2(MAXF);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid = 0;
  logic [1:0] op = 0;
  logic [IXW-1:0] idx = 0;
  logic [EW-1:0] wdata = 0, rsp_data;
  logic rsp_valid, rsp_ok;
  logic [IXW:0] count;
  int checks = 0, failures = 0;
  int n_full = 0, n_del = 0, n_upd = 0;

  track_data_mem #(.MAXF(MAXF), .ID_W(ID_W), .POS_W(POS_W)) dut (.*);

  logic [EW-1:0] model [$];

  task automatic do_op(int o, int i, logic [EW-1:0] d);
    bit exp_ok;
    logic [EW-1:0] exp_d;
    exp_ok = (o == 0) ? model.size() < MAXF : (i < model.size());
    exp_d = (o == 3 && exp_ok) ? model[i] : '0;
    @(negedge clk);
    op_valid = 1; op = 2'(o); idx = IXW'(i); wdata = d;
    @(negedge clk);
    op_valid = 0;
    checks++;
    if (!rsp_valid || rsp_ok != exp_ok || (o == 3 && exp_ok && rsp_data != exp_d)) begin
      failures++;
      if (failures < 10) $display("FAIL op %0d idx %0d: ok %0d exp %0d data %h exp %h", o, i, rsp_ok, exp_ok, rsp_data, exp_d);
    end
    if (exp_ok)
      case (o)
        0: model.push_back(d);
        1: begin model[i] = d; n_upd++; end
        2: begin model[i] = model[model.size() - 1]; void'(model.pop_back()); n_del++; end
        default: ;
      endcase
    else if (o == 0) n_full++;
    checks++;
    if (int'(count) != model.size()) begin
      failures++;
      if (failures < 10) $display("FAIL count %0d exp %0d", count, model.size());
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k <= MAXF; k++) do_op(0, 0, EW'({$urandom, $urandom}));
    for (int k = 0; k < MAXF; k++) do_op(3, k, '0);
    for (int k = 0; k < 2000; k++) begin
      int o, i;
      o = $urandom % 4;
      i = $urandom % (MAXF + 2);
      if (i >= MAXF) i = MAXF - 1;
      do_op(o, i, EW'({$urandom, $urandom}));
    end
    while (model.size() > 0) begin do_op(2, 0, '0); do_op(3, 0, '0); end
    do_op(2, 0, '0);
    $display("list full %0d times, %0d updates, %0d removals", n_full, n_upd, n_del);
    checks++;
    if (n_full == 0 || n_del == 0 || n_upd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
