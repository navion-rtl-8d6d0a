// track_data_mem: Tracking Data memory of the vision frontend, the list of
// features currently being tracked.
//
// Following the paper, feature tracking updates each stored feature in place
// when it is tracked again and removes it when tracking fails; up to 200
// features are tracked per frame (MAXF).
//
// This design's choices: the list is kept dense in entries 0 .. count-1, so a
// tracker simply walks indices below count. Removing entry i moves the last
// entry (count-1) into slot i and decrements count; the tracker therefore
// processes index i again after a removal. New features (after detection and
// stereo matching at keyframes) are appended at index count. An entry holds the
// track ID that links the feature to its track in the backend and its
// sub-pixel position (x, y), two POS_W-bit fixed-point words whose format is
// left to the tracker.
//
// Interface: one operation per clock on op_valid with op = ADD / UPD / DEL / RD
// and index idx (ignored by ADD). UPD writes wdata to entry idx, ADD appends
// wdata, DEL removes entry idx, RD reads entry idx. One clock later rsp_valid
// rises with rsp_ok (low when the index is not below count or, for ADD, when
// the list is full) and, for RD, rsp_data. count shows the number of features.
module track_data_mem #(
  parameter int unsigned MAXF  = 200,
  parameter int unsigned ID_W  = 12,
  parameter int unsigned POS_W = 16,
  localparam int unsigned IXW  = $clog2(MAXF),
  localparam int unsigned EW   = ID_W + 2 * POS_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          op_valid,
  input  logic [1:0]    op,
  input  logic [IXW-1:0] idx,
  input  logic [EW-1:0] wdata,      // {track id, x, y}
  output logic          rsp_valid,
  output logic          rsp_ok,
  output logic [EW-1:0] rsp_data,
  output logic [IXW:0]  count
);
  localparam logic [1:0] OP_ADD = 2'd0, OP_UPD = 2'd1, OP_DEL = 2'd2, OP_RD = 2'd3;
  logic [EW-1:0] mem [MAXF];

  logic in_list, ok;
  always_comb begin
    in_list = {1'b0, idx} < count;
    ok = (op == OP_ADD) ? int'(count) < MAXF : in_list;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; rsp_valid <= 1'b0; rsp_ok <= 1'b0;
    end else begin
      rsp_valid <= op_valid;
      rsp_ok    <= op_valid && ok;
      if (op_valid && ok) begin
        if (op == OP_ADD) count <= count + 1'b1;
        if (op == OP_DEL) count <= count - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (op_valid && ok) begin
      case (op)
        OP_ADD:  mem[IXW'(count)] <= wdata;
        OP_UPD:  mem[idx] <= wdata;
        OP_DEL:  mem[idx] <= mem[IXW'(count - 1'b1)];
        OP_RD:   rsp_data <= mem[idx];
        default: ;
      endcase
    end
  end
endmodule
