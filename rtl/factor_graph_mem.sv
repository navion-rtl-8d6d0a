// factor_graph_mem: the backend's vision-factor (feature track) memory in the
// two-stage form of the paper.
//
// A feature track holds up to AGE (10) observations of one landmark, each a
// keyframe ID and three double-precision coordinates. Sized for the worst case
// (TRACKS = 4000 tracks x 10) one flat memory would need 40,000 observation
// entries, but at most OBS = 4000 observations exist at once. As in the paper the
// memory is split: a sparse table of TRACKS*AGE 12-bit pointers, indexed by
// (track, slot), points into a dense memory of OBS observations. Reading costs
// one extra clock (pointer, then observation): rd_valid follows rd_en after two
// clocks, with rd_hit low for an empty slot.
//
// This design's own choices: pointer value all-ones marks an empty slot; free
// dense entries are kept on a stack (free list); after reset the pointer table is
// cleared and the free list filled, one entry per clock (busy high, TRACKS*AGE
// clocks); a write to an empty slot takes a free entry (wr_fail pulses if none is
// left), a write to a filled slot overwrites its entry; del_en frees all entries
// of one track, one slot per clock. Writes take two clocks. One request is taken
// per clock while busy is low.
module factor_graph_mem
  import navion_pkg::*;
#(
  parameter int unsigned TRACKS = 4000,
  parameter int unsigned AGE    = 10,
  parameter int unsigned OBS    = 4000,
  parameter int unsigned PTR_W  = 12,
  localparam int unsigned TW    = $clog2(TRACKS),
  localparam int unsigned SW    = $clog2(AGE),
  localparam int unsigned NSP   = TRACKS * AGE,
  localparam int unsigned SPW   = $clog2(NSP),
  localparam logic [PTR_W-1:0] NULLP = '1
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          busy,
  output logic          full,
  output logic [PTR_W:0] n_used,
  // add / update an observation
  input  logic          wr_en,
  input  logic [TW-1:0] wr_track,
  input  logic [SW-1:0] wr_slot,
  input  obs_t          wr_obs,
  output logic          wr_fail,
  // remove a track
  input  logic          del_en,
  input  logic [TW-1:0] del_track,
  // read an observation
  input  logic          rd_en,
  input  logic [TW-1:0] rd_track,
  input  logic [SW-1:0] rd_slot,
  output logic          rd_valid,
  output logic          rd_hit,
  output obs_t          rd_obs
);
  initial assert (OBS < 2**PTR_W) else $error("factor_graph_mem: OBS does not fit the pointer");

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_WR, S_DEL_RD, S_DEL} state_e;

  logic [PTR_W-1:0] spm [NSP];     // stage 1: sparse pointer table
  obs_t             dm  [OBS];     // stage 2: dense observations
  logic [PTR_W-1:0] fl  [OBS];     // free list (stack)
  logic [PTR_W:0]   top;           // number of free entries

  state_e st;
  logic [SPW-1:0] init_i, op_idx;
  obs_t           op_obs;
  logic [SPW-1:0] del_base;
  int unsigned    del_k;
  logic [PTR_W-1:0] sp_q;          // registered pointer-table read

  logic [SPW-1:0] wr_idx, rd_idx, dl_idx;
  assign wr_idx = SPW'(int'(wr_track) * AGE + int'(wr_slot));
  assign rd_idx = SPW'(int'(rd_track) * AGE + int'(rd_slot));
  assign dl_idx = SPW'(int'(del_base) + del_k);

  assign busy   = (st != S_IDLE);
  assign full   = (top == '0);
  assign n_used = (PTR_W+1)'(OBS) - top;

  // ---- read pipeline: stage 1 pointer, stage 2 observation ----
  logic             rd1_v;
  logic [PTR_W-1:0] rd1_p;
  always_ff @(posedge clk) begin
    if (rd_en) rd1_p <= spm[rd_idx];
    if (rd1_v && rd1_p != NULLP) rd_obs <= dm[rd1_p];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd1_v <= 1'b0; rd_valid <= 1'b0; rd_hit <= 1'b0;
    end else begin
      rd1_v    <= rd_en && !busy;
      rd_valid <= rd1_v;
      rd_hit   <= rd1_v && rd1_p != NULLP;
    end
  end

  // ---- pointer-table reads for write and delete ----
  always_ff @(posedge clk) begin
    if (st == S_IDLE && wr_en) sp_q <= spm[wr_idx];
    else if ((st == S_DEL_RD || st == S_DEL) && del_k < AGE) sp_q <= spm[dl_idx];
  end

  // ---- memory writes ----
  logic             sp_we;
  logic [SPW-1:0]   sp_wa;
  logic [PTR_W-1:0] sp_wd;
  logic             dm_we;
  logic [PTR_W-1:0] dm_wa;
  logic             fl_we;
  logic [PTR_W-1:0] fl_wa, fl_wd;
  logic [SPW-1:0]   del_prev;

  always_comb begin
    sp_we = 1'b0; sp_wa = op_idx; sp_wd = NULLP;
    dm_we = 1'b0; dm_wa = sp_q;
    fl_we = 1'b0; fl_wa = top[PTR_W-1:0]; fl_wd = sp_q;
    unique case (st)
      S_INIT: begin
        sp_we = 1'b1; sp_wa = init_i;
        if (int'(init_i) < OBS) begin fl_we = 1'b1; fl_wa = PTR_W'(init_i); fl_wd = PTR_W'(init_i); end
      end
      S_WR: begin
        if (sp_q != NULLP) dm_we = 1'b1;                       // overwrite in place
        else if (top != '0) begin                              // take a free entry
          dm_we = 1'b1; dm_wa = fl[top[PTR_W-1:0] - 1'b1];
          sp_we = 1'b1; sp_wd = dm_wa;
        end
      end
      S_DEL: begin
        sp_we = 1'b1; sp_wa = del_prev;                        // clear the slot read last clock
        if (sp_q != NULLP) fl_we = 1'b1;                       // give its entry back
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (sp_we) spm[sp_wa] <= sp_wd;
    if (dm_we) dm[dm_wa] <= op_obs;
    if (fl_we) fl[fl_wa] <= fl_wd;
  end

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_INIT; init_i <= '0; top <= '0; op_idx <= '0; op_obs <= '0;
      del_base <= '0; del_k <= 0; del_prev <= '0; wr_fail <= 1'b0;
    end else begin
      wr_fail <= 1'b0;
      unique case (st)
        S_INIT: begin
          init_i <= init_i + 1'b1;
          if (int'(init_i) == NSP - 1) begin st <= S_IDLE; top <= (PTR_W+1)'(OBS); end
        end
        S_IDLE: begin
          if (wr_en) begin
            op_idx <= wr_idx; op_obs <= wr_obs; st <= S_WR;
          end else if (del_en) begin
            del_base <= SPW'(int'(del_track) * AGE); del_k <= 0; st <= S_DEL_RD;
          end
        end
        S_WR: begin
          if (sp_q == NULLP) begin
            if (top != '0) top <= top - 1'b1;
            else wr_fail <= 1'b1;
          end
          st <= S_IDLE;
        end
        S_DEL_RD: begin
          del_prev <= dl_idx; del_k <= del_k + 1; st <= S_DEL;
        end
        S_DEL: begin
          if (sp_q != NULLP) top <= top + 1'b1;
          del_prev <= dl_idx;
          if (del_k == AGE) st <= S_IDLE;
          else del_k <= del_k + 1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (wr_en || del_en || rd_en) |-> !busy)
    else $error("factor_graph_mem: request while busy");
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({wr_en, del_en, rd_en}))
    else $error("factor_graph_mem: more than one request in a clock");
endmodule
