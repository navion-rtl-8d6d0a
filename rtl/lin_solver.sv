// lin_solver: the backend's linear solver. It solves H * dx = eps, H symmetric
// positive definite, with Cholesky factorisation followed by forward and back
// substitution, in place: the factor U (H = U'U) overwrites H in the linear solver
// matrix memory (lsm_wrapper) and dx overwrites eps in the vector memory.
//
// Following the paper, the solver only visits the positions that the fixed
// sparsity pattern can make non-zero: every inner-product loop starts at the
// first row of the band (lo) and stops at its last column (hi), so the work grows
// with the band, not with the cube of the matrix size. The arithmetic is the
// backend's double-precision units: fp_mul, fp_add, fp_sqrt and fp_recip.
//
//   Cholesky, row i, column j = i..hi(i):
//     s = H[i][j] - sum_{k=lo(j)}^{i-1} U[k][i]*U[k][j]
//     j == i : U[i][i] = sqrt(s), R[i] = 1/U[i][i]   (R kept in a register array)
//     j >  i : U[i][j] = s * R[i]
//   forward,  i = 0..N-1 : y[i] = (eps[i] - sum_{k=lo(i)}^{i-1} U[k][i]*y[k]) * R[i]
//   backward, i = N-1..0 : x[i] = (y[i]   - sum_{j=i+1}^{hi(i)} U[i][j]*x[j]) * R[i]
//
// The order of the loops, the reciprocal-then-multiply division and the
// unpipelined sequencing (each multiply-accumulate takes two reads, a multiply
// and an add, about 6 clocks; 3.87 million clocks for the full 300 x 300 band)
// are this design's choices.
//
// Interface: while busy is low, the m_* port reads and writes the matrix memory
// (one-cycle read latency, masked positions read as 0.0) and the v_* port the
// vector memory (one-cycle read latency). A start pulse begins the solve; done
// pulses when dx is in the vector memory. n_mac counts the multiply-accumulate
// steps of the last solve.
module lin_solver #(
  parameter int unsigned NKF  = 20,
  parameter int unsigned BS   = 15,
  parameter int unsigned BAND = 4,
  localparam int unsigned N   = NKF * BS,
  localparam int unsigned IW  = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [31:0]   n_mac,
  // matrix memory access while idle
  input  logic          m_req_valid,
  input  logic          m_req_we,
  input  logic [IW-1:0] m_req_row,
  input  logic [IW-1:0] m_req_col,
  input  logic [63:0]   m_req_wdata,
  output logic          m_rsp_valid,
  output logic          m_rsp_masked,
  output logic [63:0]   m_rsp_rdata,
  // vector memory access while idle
  input  logic          v_req_valid,
  input  logic          v_req_we,
  input  logic [IW-1:0] v_req_idx,
  input  logic [63:0]   v_req_wdata,
  output logic          v_rsp_valid,
  output logic [63:0]   v_rsp_rdata
);
  typedef enum logic [1:0] {PH_CHOL, PH_FWD, PH_BWD} phase_e;
  typedef enum logic [3:0] {
    S_IDLE, S_ACC, S_ACC_W, S_CHK, S_OP1, S_OP2, S_OP2_W, S_MUL, S_ADD,
    S_FIN, S_SQRT, S_RECIP, S_SCALE, S_NEXT, S_DONE
  } state_e;

  function automatic logic [IW-1:0] lo_row(input logic [IW-1:0] col);
    int unsigned kb;
    kb = int'(col) / BS;
    return IW'((kb > BAND) ? (kb - BAND) * BS : 0);
  endfunction

  function automatic logic [IW-1:0] hi_col(input logic [IW-1:0] row);
    int unsigned kb;
    kb = int'(row) / BS;
    return IW'(((kb + BAND + 1 < NKF) ? kb + BAND + 1 : NKF) * BS - 1);
  endfunction

  state_e  st;
  phase_e  ph;
  logic [IW-1:0] i, j, k;
  logic [63:0]   acc, op1, rcur;
  logic [63:0]   rdiag [N];

  // ---- matrix memory ----
  logic          mi_valid, mi_we;
  logic [IW-1:0] mi_row, mi_col;
  logic [63:0]   mi_wdata;
  logic          mm_valid, mm_we;
  logic [IW-1:0] mm_row, mm_col;
  logic [63:0]   mm_wdata;
  logic          mr_valid, mr_masked;
  logic [63:0]   mr_rdata;

  always_comb begin
    if (busy) begin
      mm_valid = mi_valid; mm_we = mi_we; mm_row = mi_row; mm_col = mi_col; mm_wdata = mi_wdata;
    end else begin
      mm_valid = m_req_valid; mm_we = m_req_we; mm_row = m_req_row; mm_col = m_req_col; mm_wdata = m_req_wdata;
    end
  end

  lsm_wrapper #(.NKF(NKF), .BS(BS), .BAND(BAND)) u_lsm (
    .clk, .rst_n,
    .req_valid(mm_valid), .req_we(mm_we), .req_row(mm_row), .req_col(mm_col), .req_wdata(mm_wdata),
    .rsp_valid(mr_valid), .rsp_masked(mr_masked), .rsp_rdata(mr_rdata)
  );
  assign m_rsp_valid  = mr_valid && !busy;
  assign m_rsp_masked = mr_masked;
  assign m_rsp_rdata  = mr_rdata;

  // ---- vector memory ----
  logic [63:0]   vmem [N];
  logic          vi_valid, vi_we;
  logic [IW-1:0] vi_idx;
  logic [63:0]   vi_wdata, v_rdata_q;
  logic          vv_valid, vv_we, v_rv_q;
  logic [IW-1:0] vv_idx;
  logic [63:0]   vv_wdata;

  always_comb begin
    if (busy) begin
      vv_valid = vi_valid; vv_we = vi_we; vv_idx = vi_idx; vv_wdata = vi_wdata;
    end else begin
      vv_valid = v_req_valid; vv_we = v_req_we; vv_idx = v_req_idx; vv_wdata = v_req_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (vv_valid && vv_we) vmem[vv_idx] <= vv_wdata;
    if (vv_valid && !vv_we) v_rdata_q <= vmem[vv_idx];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_rv_q <= 1'b0;
    else        v_rv_q <= vv_valid && !vv_we;
  end
  assign v_rsp_valid = v_rv_q && !busy;
  assign v_rsp_rdata = v_rdata_q;

  // ---- arithmetic units ----
  logic        mul_go, add_go, sqrt_go, rcp_go;
  logic [63:0] mul_a, mul_b;
  logic        mul_v, add_v, sqrt_v, rcp_v, sqrt_busy, rcp_busy;
  logic [63:0] mul_y, add_y, sqrt_y, rcp_y;

  fp_mul   u_mul  (.clk, .rst_n, .in_valid(mul_go),  .a(mul_a), .b(mul_b), .out_valid(mul_v), .y(mul_y));
  fp_add   u_add  (.clk, .rst_n, .in_valid(add_go),  .a(acc), .b(mul_y), .sub(1'b1), .out_valid(add_v), .y(add_y));
  fp_sqrt  u_sqrt (.clk, .rst_n, .in_valid(sqrt_go), .a(acc), .busy(sqrt_busy), .out_valid(sqrt_v), .y(sqrt_y));
  fp_recip u_rcp  (.clk, .rst_n, .in_valid(rcp_go),  .a(sqrt_y), .busy(rcp_busy), .out_valid(rcp_v), .y(rcp_y));

  // the sequencer waits for each iterative unit's result, so it never starts a busy one
  assert property (@(posedge clk) disable iff (!rst_n) !(sqrt_go && sqrt_busy) && !(rcp_go && rcp_busy))
    else $error("lin_solver: iterative unit started while busy");

  // ---- control: combinational request generation ----
  logic more_terms;
  always_comb begin
    unique case (ph)
      PH_CHOL: more_terms = (k < i);
      PH_FWD:  more_terms = (k < i);
      default: more_terms = (k <= hi_col(i)) && (int'(k) < N);
    endcase
  end

  always_comb begin
    mi_valid = 1'b0; mi_we = 1'b0; mi_row = i; mi_col = j; mi_wdata = '0;
    vi_valid = 1'b0; vi_we = 1'b0; vi_idx = i; vi_wdata = '0;
    mul_go = 1'b0; mul_a = op1; mul_b = (ph == PH_CHOL) ? mr_rdata : v_rdata_q;
    add_go = 1'b0; sqrt_go = 1'b0; rcp_go = 1'b0;
    unique case (st)
      S_ACC: begin
        if (ph == PH_CHOL) mi_valid = 1'b1;            // H[i][j]
        else               vi_valid = 1'b1;            // eps[i] / y[i]
      end
      S_OP1: begin
        mi_valid = 1'b1;
        if (ph == PH_BWD) begin mi_row = i; mi_col = k; end
        else              begin mi_row = k; mi_col = i; end
      end
      S_OP2: begin
        if (ph == PH_CHOL) begin mi_valid = 1'b1; mi_row = k; mi_col = j; end
        else               begin vi_valid = 1'b1; vi_idx = k; end
      end
      S_OP2_W: mul_go = 1'b1;
      S_MUL:   add_go = mul_v;
      S_FIN: begin
        if (ph == PH_CHOL && i == j) sqrt_go = 1'b1;
        else begin
          mul_go = 1'b1; mul_a = acc;
          mul_b  = (ph == PH_CHOL) ? rcur : rdiag[i];
        end
      end
      S_SQRT: begin
        if (sqrt_v) begin
          mi_valid = 1'b1; mi_we = 1'b1; mi_row = i; mi_col = i; mi_wdata = sqrt_y;
          rcp_go = 1'b1;
        end
      end
      S_SCALE: begin
        if (mul_v) begin
          if (ph == PH_CHOL) begin mi_valid = 1'b1; mi_we = 1'b1; mi_wdata = mul_y; end
          else               begin vi_valid = 1'b1; vi_we = 1'b1; vi_wdata = mul_y; end
        end
      end
      default: ;
    endcase
  end

  // ---- control: sequencing ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph <= PH_CHOL; i <= '0; j <= '0; k <= '0;
      acc <= '0; op1 <= '0; rcur <= '0; busy <= 1'b0; done <= 1'b0; n_mac <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1; ph <= PH_CHOL; i <= '0; j <= '0; n_mac <= '0; st <= S_ACC;
        end
        S_ACC: begin
          unique case (ph)
            PH_CHOL: k <= lo_row(j);
            PH_FWD:  k <= lo_row(i);
            default: k <= i + 1'b1;
          endcase
          st <= S_ACC_W;
        end
        S_ACC_W: begin
          acc <= (ph == PH_CHOL) ? mr_rdata : v_rdata_q;
          st  <= S_CHK;
        end
        S_CHK:   st <= more_terms ? S_OP1 : S_FIN;
        S_OP1:   st <= S_OP2;
        S_OP2:   begin op1 <= mr_rdata; st <= S_OP2_W; end
        S_OP2_W: st <= S_MUL;
        S_MUL:   if (mul_v) st <= S_ADD;
        S_ADD:   if (add_v) begin
          acc <= add_y; k <= k + 1'b1; n_mac <= n_mac + 1; st <= S_CHK;
        end
        S_FIN:   st <= (ph == PH_CHOL && i == j) ? S_SQRT : S_SCALE;
        S_SQRT:  if (sqrt_v) st <= S_RECIP;
        S_RECIP: if (rcp_v) begin
          rcur <= rcp_y; st <= S_NEXT;
        end
        S_SCALE: if (mul_v) st <= S_NEXT;
        S_NEXT: begin
          st <= S_ACC;
          unique case (ph)
            PH_CHOL: begin
              if (j < hi_col(i)) j <= j + 1'b1;
              else if (int'(i) < N - 1) begin i <= i + 1'b1; j <= i + 1'b1; end
              else begin ph <= PH_FWD; i <= '0; end
            end
            PH_FWD: begin
              if (int'(i) < N - 1) i <= i + 1'b1;
              else begin ph <= PH_BWD; i <= IW'(N - 1); end
            end
            default: begin
              if (i != '0) i <= i - 1'b1;
              else st <= S_DONE;
            end
          endcase
        end
        S_DONE: begin busy <= 1'b0; done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_RECIP && rcp_v) rdiag[i] <= rcp_y;
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("lin_solver: start while busy");
endmodule
