// navion_top: the parts of the Navion visual-inertial odometry chip that this
// RTL implements, wired as in the chip's block diagram.
//
// Vision frontend (clock clk_vfe). Left and right 8-bit pixel streams each pass
// through a block compressor (img_compress). At keyframes the uncompressed left
// stream also feeds feature detection (feature_detect), which reports the best
// Shi-Tomasi corner of every grid cell on the fd_* port. Compressed left frames go, frame by
// frame, alternately into Frame (1) and Frame (2), so that feature tracking
// always has the previous and the current frame; at keyframes they also go into
// the Left Frame buffer, and the right stream, which is only taken at keyframes,
// into the Right Frame buffer. Stereo matching (stereo_match) reads Left and
// Right Frame and answers requests for feature positions.
//
// Inertial frontend (clock clk_be): the measurement input (imu_input) collects
// the six single-precision words of each measurement from the 32-bit bus and
// converts them to double precision; the preintegration that would consume them
// is not built, so they leave on imu_*.
//
// Backend (clock clk_be). The two-stage feature track memory
// (factor_graph_mem), the shared register file (be_regfile), the sine/cosine
// unit (fp_trig) and the linear
// solver (lin_solver, which holds the sparse linear solver matrix memory and the
// double-precision arithmetic).
//
// Processing modes: the kf input, sampled with the first left pixel of a frame,
// selects keyframe or non-keyframe processing. In a non-keyframe the right
// stream is ignored and the Left/Right Frame buffers keep the last keyframe;
// stereo requests are taken only while the last completed frame is a keyframe.
//
// The Tracking Data memory (track_data_mem) holds the list of tracked features.
//
// Not built here, brought out as ports instead: feature tracking reads Frame
// (1)/(2) through the ft_* port and maintains the Tracking Data list through
// td_*; the vision frontend control, which selects among the detected features,
// issues stereo requests through sm_*; the "add factors" step writes the feature
// track memory through fg_*; the backend state machines use the register file
// through rf_*; the Rodrigues operations use fp_trig through trig_*; linearisation loads H and eps and reads dx through ls_*. Undistort & rectify is not built, so the Left/Right Frame buffers
// receive the input frames as they are (the input is taken to be rectified).
// Since no block crossing the two clock domains is built, no signal crosses them.
module navion_top
  import navion_pkg::*;
#(
  parameter int unsigned IMG_W  = 752,
  parameter int unsigned IMG_H  = 480,
  parameter int unsigned TW     = 51,
  parameter int unsigned TH     = 5,
  parameter int unsigned RW     = 421,
  parameter int unsigned CELL_W = 15,
  parameter int unsigned CELL_H = 15,
  parameter int unsigned MAXF   = 200,
  parameter int unsigned NKF    = 20,
  parameter int unsigned BS     = 15,
  parameter int unsigned BAND   = 4,
  parameter int unsigned TRACKS = 4000,
  parameter int unsigned AGE    = 10,
  parameter int unsigned OBS    = 4000,
  parameter int unsigned PTR_W  = 12,
  parameter int unsigned NREG   = 85,
  localparam int unsigned XW    = $clog2(IMG_W),
  localparam int unsigned YW    = $clog2(IMG_H),
  localparam int unsigned DW    = $clog2(RW),
  localparam int unsigned TIXW  = $clog2(MAXF),
  localparam int unsigned IW    = $clog2(NKF * BS),
  localparam int unsigned TKW   = $clog2(TRACKS),
  localparam int unsigned SLW   = $clog2(AGE),
  localparam int unsigned RAW   = $clog2(NREG)
) (
  input  logic                clk_vfe,
  input  logic                clk_be,
  input  logic                rst_n,
  // ---- camera input ----
  input  logic                kf,            // this frame is a keyframe
  input  logic                l_pix_valid,
  input  logic [7:0]          l_pix,
  input  logic                r_pix_valid,
  input  logic [7:0]          r_pix,
  output logic                frame_done,    // last left block of a frame stored
  output logic                frame_is_kf,   // mode of the last completed frame
  output logic                cur_bank,      // Frame (1)=0 / (2)=1 holding the newest frame
  // ---- feature detection (keyframes only) ----
  input  logic [20:0]         fd_min_score,
  output logic                fd_valid,
  output logic [XW-1:0]       fd_x,
  output logic [YW-1:0]       fd_y,
  output logic [20:0]         fd_score,
  // ---- Tracking Data memory (feature list of the tracker) ----
  input  logic                td_op_valid,
  input  logic [1:0]          td_op,         // 0 add, 1 update, 2 remove, 3 read
  input  logic [TIXW-1:0]     td_idx,
  input  logic [43:0]         td_wdata,      // {track id 12, x 16, y 16}
  output logic                td_rsp_valid,
  output logic                td_rsp_ok,
  output logic [43:0]         td_rsp_data,
  output logic [TIXW:0]       td_count,
  // ---- feature tracking read port (Frame (1)/(2)) ----
  input  logic                ft_rd_en,
  input  logic                ft_rd_bank,
  input  logic [XW-1:0]       ft_rd_x,
  input  logic [YW-1:0]       ft_rd_y,
  output logic                ft_rd_valid,
  output logic [PIX_BITS-1:0] ft_rd_pix,
  // ---- stereo matching ----
  input  logic                sm_req_valid,
  input  logic [XW-1:0]       sm_req_x,
  input  logic [YW-1:0]       sm_req_y,
  output logic                sm_busy,
  output logic                sm_res_valid,
  output logic                sm_res_found,
  output logic [DW-1:0]       sm_res_disp,
  output logic [15:0]         sm_res_cost,
  // ---- inertial measurements (32-bit single-precision bus) ----
  input  logic                imu_resync,
  input  logic                imu_valid,
  input  logic [31:0]         imu_word,
  output logic                imu_meas_valid,
  output logic [63:0]         imu_acc  [3],
  output logic [63:0]         imu_gyro [3],
  // ---- feature track memory ----
  output logic                fg_busy,
  output logic                fg_full,
  output logic [PTR_W:0]      fg_n_used,
  input  logic                fg_wr_en,
  input  logic [TKW-1:0]      fg_wr_track,
  input  logic [SLW-1:0]      fg_wr_slot,
  input  obs_t                fg_wr_obs,
  output logic                fg_wr_fail,
  input  logic                fg_del_en,
  input  logic [TKW-1:0]      fg_del_track,
  input  logic                fg_rd_en,
  input  logic [TKW-1:0]      fg_rd_track,
  input  logic [SLW-1:0]      fg_rd_slot,
  output logic                fg_rd_valid,
  output logic                fg_rd_hit,
  output obs_t                fg_rd_obs,
  // ---- backend register file ----
  input  logic                rf_we,
  input  logic [RAW-1:0]      rf_waddr,
  input  logic [63:0]         rf_wdata,
  input  logic [RAW-1:0]      rf_ra_addr,
  output logic [63:0]         rf_ra_data,
  input  logic [RAW-1:0]      rf_rb_addr,
  output logic [63:0]         rf_rb_data,
  // ---- trigonometric unit (sine / cosine) ----
  input  logic                trig_valid,
  input  logic [63:0]         trig_a,
  output logic                trig_busy,
  output logic                trig_out_valid,
  output logic [63:0]         trig_sin,
  output logic [63:0]         trig_cos,
  // ---- linear solver ----
  input  logic                ls_start,
  output logic                ls_busy,
  output logic                ls_done,
  output logic [31:0]         ls_n_mac,
  input  logic                ls_m_req_valid,
  input  logic                ls_m_req_we,
  input  logic [IW-1:0]       ls_m_req_row,
  input  logic [IW-1:0]       ls_m_req_col,
  input  logic [63:0]         ls_m_req_wdata,
  output logic                ls_m_rsp_valid,
  output logic                ls_m_rsp_masked,
  output logic [63:0]         ls_m_rsp_rdata,
  input  logic                ls_v_req_valid,
  input  logic                ls_v_req_we,
  input  logic [IW-1:0]       ls_v_req_idx,
  input  logic [63:0]         ls_v_req_wdata,
  output logic                ls_v_rsp_valid,
  output logic [63:0]         ls_v_rsp_rdata
);
  localparam int unsigned NBLK = (IMG_W / BLK) * (IMG_H / BLK);
  localparam int unsigned BAW  = $clog2(NBLK);

  // =================== vision frontend ===================
  logic           lc_valid, lc_done, rc_valid, rc_done;
  logic [BAW-1:0] lc_addr, rc_addr;
  cblock_t        lc_word, rc_word;
  logic           in_frame, kf_q, wbank;

  // mode: sample kf with the first left pixel of each frame
  always_ff @(posedge clk_vfe or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0; kf_q <= 1'b0; wbank <= 1'b0; frame_is_kf <= 1'b0;
    end else begin
      if (l_pix_valid && !in_frame) begin
        in_frame <= 1'b1; kf_q <= kf;
      end
      if (lc_done) begin
        in_frame    <= 1'b0;
        wbank       <= ~wbank;
        frame_is_kf <= kf_q;
      end
    end
  end
  logic kf_now;
  assign kf_now = in_frame ? kf_q : kf;   // mode of the pixel being taken
  assign cur_bank   = ~wbank;
  assign frame_done = lc_done;

  img_compress #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_lcomp (
    .clk(clk_vfe), .rst_n, .pix_valid(l_pix_valid), .pix(l_pix),
    .blk_valid(lc_valid), .blk_addr(lc_addr), .blk_word(lc_word), .frame_done(lc_done));

  // right frames are streamed in at keyframes only
  img_compress #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_rcomp (
    .clk(clk_vfe), .rst_n, .pix_valid(r_pix_valid && kf_now), .pix(r_pix),
    .blk_valid(rc_valid), .blk_addr(rc_addr), .blk_word(rc_word), .frame_done(rc_done));

  // feature detection on the uncompressed left stream of keyframes
  feature_detect #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CELL_W(CELL_W), .CELL_H(CELL_H)) u_fd (
    .clk(clk_vfe), .rst_n, .pix_valid(l_pix_valid && kf_now), .pix(l_pix), .min_score(fd_min_score),
    .feat_valid(fd_valid), .feat_x(fd_x), .feat_y(fd_y), .feat_score(fd_score));

  // Frame (1) / Frame (2): ping-pong for feature tracking
  logic [1:0]          fb_rv;
  logic [PIX_BITS-1:0] fb_rp [2];
  for (genvar g = 0; g < 2; g++) begin : g_track_frame
    frame_buffer #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_fb (
      .clk(clk_vfe), .rst_n,
      .wr_en(lc_valid && wbank == 1'(g)), .wr_addr(lc_addr), .wr_word(lc_word),
      .rd_en(ft_rd_en && ft_rd_bank == 1'(g)), .rd_x(ft_rd_x), .rd_y(ft_rd_y),
      .rd_valid(fb_rv[g]), .rd_pix(fb_rp[g]));
  end
  assign ft_rd_valid = |fb_rv;
  assign ft_rd_pix   = fb_rv[1] ? fb_rp[1] : fb_rp[0];

  // Tracking Data: features being tracked, updated in place or removed by the tracker
  track_data_mem #(.MAXF(MAXF), .ID_W(12), .POS_W(16)) u_td (
    .clk(clk_vfe), .rst_n, .op_valid(td_op_valid), .op(td_op), .idx(td_idx), .wdata(td_wdata),
    .rsp_valid(td_rsp_valid), .rsp_ok(td_rsp_ok), .rsp_data(td_rsp_data), .count(td_count));

  // Left Frame / Right Frame: keyframe pair for stereo matching
  logic                l_en, r_en, l_v, r_v;
  logic [XW-1:0]       l_x, r_x;
  logic [YW-1:0]       l_y, r_y;
  logic [PIX_BITS-1:0] l_p, r_p;

  frame_buffer #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_left_frame (
    .clk(clk_vfe), .rst_n, .wr_en(lc_valid && kf_q), .wr_addr(lc_addr), .wr_word(lc_word),
    .rd_en(l_en), .rd_x(l_x), .rd_y(l_y), .rd_valid(l_v), .rd_pix(l_p));
  frame_buffer #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_right_frame (
    .clk(clk_vfe), .rst_n, .wr_en(rc_valid), .wr_addr(rc_addr), .wr_word(rc_word),
    .rd_en(r_en), .rd_x(r_x), .rd_y(r_y), .rd_valid(r_v), .rd_pix(r_p));

  stereo_match #(.IMG_W(IMG_W), .IMG_H(IMG_H), .TW(TW), .TH(TH), .RW(RW)) u_sm (
    .clk(clk_vfe), .rst_n,
    .req_valid(sm_req_valid && frame_is_kf && !in_frame), .req_x(sm_req_x), .req_y(sm_req_y),
    .busy(sm_busy),
    .l_rd_en(l_en), .l_rd_x(l_x), .l_rd_y(l_y), .l_rd_valid(l_v), .l_rd_pix(l_p),
    .r_rd_en(r_en), .r_rd_x(r_x), .r_rd_y(r_y), .r_rd_valid(r_v), .r_rd_pix(r_p),
    .res_valid(sm_res_valid), .res_found(sm_res_found), .res_disp(sm_res_disp), .res_cost(sm_res_cost));

  // =================== inertial frontend input ===================
  imu_input u_imu (
    .clk(clk_be), .rst_n, .resync(imu_resync), .in_valid(imu_valid), .in_word(imu_word),
    .meas_valid(imu_meas_valid), .acc(imu_acc), .gyro(imu_gyro));

  // =================== backend ===================
  factor_graph_mem #(.TRACKS(TRACKS), .AGE(AGE), .OBS(OBS), .PTR_W(PTR_W)) u_fg (
    .clk(clk_be), .rst_n, .busy(fg_busy), .full(fg_full), .n_used(fg_n_used),
    .wr_en(fg_wr_en), .wr_track(fg_wr_track), .wr_slot(fg_wr_slot), .wr_obs(fg_wr_obs), .wr_fail(fg_wr_fail),
    .del_en(fg_del_en), .del_track(fg_del_track),
    .rd_en(fg_rd_en), .rd_track(fg_rd_track), .rd_slot(fg_rd_slot),
    .rd_valid(fg_rd_valid), .rd_hit(fg_rd_hit), .rd_obs(fg_rd_obs));

  be_regfile #(.NREG(NREG)) u_rf (
    .clk(clk_be), .rst_n, .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata),
    .ra_addr(rf_ra_addr), .ra_data(rf_ra_data), .rb_addr(rf_rb_addr), .rb_data(rf_rb_data));

  fp_trig u_trig (
    .clk(clk_be), .rst_n, .in_valid(trig_valid), .a(trig_a), .busy(trig_busy),
    .out_valid(trig_out_valid), .sin_y(trig_sin), .cos_y(trig_cos));

  lin_solver #(.NKF(NKF), .BS(BS), .BAND(BAND)) u_ls (
    .clk(clk_be), .rst_n, .start(ls_start), .busy(ls_busy), .done(ls_done), .n_mac(ls_n_mac),
    .m_req_valid(ls_m_req_valid), .m_req_we(ls_m_req_we), .m_req_row(ls_m_req_row),
    .m_req_col(ls_m_req_col), .m_req_wdata(ls_m_req_wdata),
    .m_rsp_valid(ls_m_rsp_valid), .m_rsp_masked(ls_m_rsp_masked), .m_rsp_rdata(ls_m_rsp_rdata),
    .v_req_valid(ls_v_req_valid), .v_req_we(ls_v_req_we), .v_req_idx(ls_v_req_idx),
    .v_req_wdata(ls_v_req_wdata), .v_rsp_valid(ls_v_rsp_valid), .v_rsp_rdata(ls_v_rsp_rdata));

  // left and right frames of a keyframe arrive together (this check's disable iff
  // is the only synchronous use of the asynchronous reset rst_n)
  assert property (@(posedge clk_vfe) disable iff (!rst_n) rc_done |-> lc_done)
    else $error("navion_top: right frame not aligned with left frame");
endmodule
