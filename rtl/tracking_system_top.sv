// tracking_system_top: the complete real-time object tracker.
//
// Camera side (one pixel per clock, 148.5 MHz): the YCbCr 4:2:2 stream is
// up-sampled to 4:4:4, converted to RGB and cleaned by a 3x3 dilation and erosion.
// The RGB result is written to the RGB region of DDR3 (channel 0, four pixels per
// 128-bit word) and, converted to HSV and classified, to the ROI region as one bit per
// pixel (channel 1, 128 pixels per word). The classifier compares each pixel with the
// HSV means of the ROI pixels in the current bounding box, measured by hsv_mean
// over the previous frame.
//
// Tracking: at the start of camera frame N the Camshift tracker searches the ROI of
// frame N-1, read back from DDR3. Its box is stored in Result RAM 1 under the
// frame's slot, the Kalman box in Result RAM 2, and the corrected final box in the
// final result RAM; the final centre updates the Kalman predictor and the final box
// becomes the box of the next search and of the HSV means.
//
// Display side: a 1080p60 timing generator reads frame N-2 from DDR3 (channel 2),
// the position joiner draws that frame's final box on it, and RGB with syncs leaves
// for the HDMI transmitter.
//
// All memory traffic (RGB write, ROI write, ROI search read, display read) is shared
// round robin by the write-read arbiter and run burst by burst by the DDR3 burst
// controller on a Spartan-6 style memory-controller user port, which is a port of
// this module, like the camera input and the video output.
//
// `init` starts tracking: it loads `init_box` as the current box. The frame after
// `init` measures the object's HSV means; tracking starts with the frame after that,
// once a frame classified with those means is complete in DDR3.
module tracking_system_top
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT      = 1920,
  parameter int unsigned V_ACT      = 1080,
  parameter int unsigned H_FP       = 88,
  parameter int unsigned H_SYNC     = 44,
  parameter int unsigned H_TOTAL    = 2200,
  parameter int unsigned V_FP       = 4,
  parameter int unsigned V_SYNC     = 5,
  parameter int unsigned V_TOTAL    = 1125,
  parameter int unsigned SW         = 512,
  parameter int unsigned SH         = 512,
  parameter int unsigned GRID       = 3,
  parameter int unsigned MIN_BOX    = 16,
  parameter int unsigned MAX_BOX    = 192,
  parameter int unsigned BURST      = 32,
  parameter int unsigned FIFO_DEPTH = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  // camera, YCbCr 4:2:2
  input  logic          cam_valid,
  input  logic          cam_sof,
  input  logic          cam_eol,
  input  logic [7:0]    cam_y,
  input  logic [7:0]    cam_c,
  // configuration
  input  logic          init,
  input  box_t          init_box,
  input  logic [7:0]    thr_h,
  input  logic [7:0]    thr_s,
  input  logic [7:0]    thr_v,
  input  logic [7:0]    thr_a,
  input  logic [8:0]    alpha,
  input  logic [8:0]    beta,
  input  logic [8:0]    gamma,
  input  logic [CW-1:0] size_thr,
  // DDR3 memory controller user port
  output logic          mem_cmd_en,
  output logic [2:0]    mem_cmd_instr,
  output logic [29:0]   mem_cmd_byte_addr,
  output logic [5:0]    mem_cmd_bl,
  input  logic          mem_cmd_full,
  output logic          mem_wr_en,
  output logic [DW-1:0] mem_wr_data,
  input  logic          mem_wr_full,
  output logic          mem_rd_en,
  input  logic [DW-1:0] mem_rd_data,
  input  logic          mem_rd_empty,
  // video out towards the HDMI transmitter
  output logic          vid_de,
  output logic          vid_hsync,
  output logic          vid_vsync,
  output logic [23:0]   vid_rgb,
  // status
  output box_t          track_box,
  output logic          track_valid,
  output logic          track_used_kalman,
  output logic          track_lost,
  output logic [31:0]   frame_count,
  output logic [31:0]   underflow_count
);
  localparam int unsigned RGB_WORDS = H_ACT * V_ACT / 4;
  localparam int unsigned ROI_WPR   = H_ACT / DW;
  localparam int unsigned ROI_WORDS = ROI_WPR * V_ACT;
  localparam int unsigned CNTW      = $clog2(FIFO_DEPTH) + 1;

  // ---------------------------------------------------------------- preprocessing
  logic       s1_valid, s1_sof, s1_eol;
  logic [7:0] s1_y, s1_cb, s1_cr;
  logic       s2_valid, s2_sof, s2_eol;
  logic [7:0] s2_r, s2_g, s2_b;
  logic       s3_valid, s3_sof, s3_eol;
  logic [23:0] s3_rgb;

  ycbcr422_to_444 u_422 (
    .clk, .rst_n, .in_valid(cam_valid), .in_sof(cam_sof), .in_eol(cam_eol),
    .in_y(cam_y), .in_c(cam_c),
    .out_valid(s1_valid), .out_sof(s1_sof), .out_eol(s1_eol),
    .out_y(s1_y), .out_cb(s1_cb), .out_cr(s1_cr));

  ycbcr_to_rgb u_rgb (
    .clk, .rst_n, .in_valid(s1_valid), .in_sof(s1_sof), .in_eol(s1_eol),
    .in_y(s1_y), .in_cb(s1_cb), .in_cr(s1_cr),
    .out_valid(s2_valid), .out_sof(s2_sof), .out_eol(s2_eol),
    .out_r(s2_r), .out_g(s2_g), .out_b(s2_b));

  dilation_erosion #(.H_ACT(H_ACT)) u_morph (
    .clk, .rst_n, .in_valid(s2_valid), .in_sof(s2_sof), .in_eol(s2_eol),
    .in_rgb({s2_r, s2_g, s2_b}),
    .out_valid(s3_valid), .out_sof(s3_sof), .out_eol(s3_eol), .out_rgb(s3_rgb));

  // ---------------------------------------------------------------- detecting
  logic       s4_valid, s4_sof, s4_eol;
  logic [7:0] s4_h, s4_s, s4_v;
  logic       s5_valid, s5_sof, s5_eol, s5_roi;
  logic [7:0] mean_h, mean_s, mean_v;
  logic       mean_valid;
  box_t       cur_box;

  rgb_to_hsv u_hsv (
    .clk, .rst_n, .in_valid(s3_valid), .in_sof(s3_sof), .in_eol(s3_eol),
    .in_r(s3_rgb[23:16]), .in_g(s3_rgb[15:8]), .in_b(s3_rgb[7:0]),
    .out_valid(s4_valid), .out_sof(s4_sof), .out_eol(s4_eol),
    .out_h(s4_h), .out_s(s4_s), .out_v(s4_v));

  roi_classifier u_cls (
    .clk, .rst_n, .in_valid(s4_valid), .in_sof(s4_sof), .in_eol(s4_eol),
    .in_h(s4_h), .in_s(s4_s), .in_v(s4_v),
    .mean_h, .mean_s, .mean_v, .thr_h, .thr_s, .thr_v, .thr_a, .alpha, .beta, .gamma,
    .out_valid(s5_valid), .out_sof(s5_sof), .out_eol(s5_eol), .out_roi(s5_roi));

  // The newest box is that of frame N-2 when frame N is measured, so it may hold
  // background: after the first frame (which measures every pixel of `init_box`)
  // only the pixels the classifier marks as ROI count. HSV is delayed by the
  // classifier's two cycles to line up with its ROI bit.
  logic [7:0] s4_h_d [2], s4_s_d [2], s4_v_d [2];
  logic       boot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s4_h_d <= '{default: '0}; s4_s_d <= '{default: '0}; s4_v_d <= '{default: '0};
      boot <= 1'b0;
    end else begin
      s4_h_d <= '{s4_h_d[0], s4_h}; s4_s_d <= '{s4_s_d[0], s4_s}; s4_v_d <= '{s4_v_d[0], s4_v};
      if (init) boot <= 1'b1;
      else if (mean_valid) boot <= 1'b0;
    end
  end

  hsv_mean #(.H_ACT(H_ACT), .V_ACT(V_ACT)) u_mean (
    .clk, .rst_n, .in_valid(s5_valid), .in_sof(s5_sof), .in_eol(s5_eol),
    .in_h(s4_h_d[1]), .in_s(s4_s_d[1]), .in_v(s4_v_d[1]), .in_sel(s5_roi),
    .box(cur_box), .sel_en(!boot),
    .load(1'b0), .load_h(8'd0), .load_s(8'd0), .load_v(8'd0),
    .mean_h, .mean_s, .mean_v, .mean_valid);

  // ---------------------------------------------------------------- frame slots
  logic          frame_start;
  logic [1:0]    wr_slot, trk_slot, disp_slot;
  logic [AW-1:0] rgb_wr_base, roi_wr_base, roi_trk_base, rgb_disp_base;

  assign frame_start = cam_valid & cam_sof;

  frame_slot_ctrl u_slots (
    .clk, .rst_n, .frame_start, .wr_slot, .trk_slot, .disp_slot,
    .rgb_wr_base, .roi_wr_base, .roi_trk_base, .rgb_disp_base, .frame_count);

  // ---------------------------------------------------------------- packing to words
  logic [DW-1:0] rgb_word, roi_word;
  logic [1:0]    rgb_n;
  logic [$clog2(DW)-1:0] roi_n;
  logic          rgb_push, roi_push;
  logic [DW-1:0] rgb_push_data, roi_push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rgb_word <= '0; rgb_n <= '0; rgb_push <= 1'b0; rgb_push_data <= '0;
      roi_word <= '0; roi_n <= '0; roi_push <= 1'b0; roi_push_data <= '0;
    end else begin
      rgb_push <= 1'b0;
      roi_push <= 1'b0;
      if (s3_valid) begin
        logic [1:0] k;
        k = s3_sof ? 2'd0 : rgb_n;
        rgb_word[32*k +: 32] <= {8'h00, s3_rgb};
        rgb_n <= k + 2'd1;
        if (k == 2'd3) begin
          rgb_push <= 1'b1;
          rgb_push_data <= {{8'h00, s3_rgb}, rgb_word[95:0]};
        end
      end
      if (s5_valid) begin
        logic [$clog2(DW)-1:0] k;
        k = s5_sof ? '0 : roi_n;
        roi_word[k] <= s5_roi;
        roi_n <= k + 1'b1;
        if (32'(k) == DW - 1 || s5_eol) begin
          roi_push <= 1'b1;
          roi_push_data <= roi_word;
          roi_push_data[k] <= s5_roi;
          roi_n <= '0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- DDR3 channels
  localparam int unsigned NP = 4;   // 0 RGB write, 1 ROI write, 2 ROI search read, 3 display read
  logic [NP-1:0] p_req, p_gnt, p_done, p_wpop, p_rvalid;
  mem_req_t      p_info  [NP];
  logic [DW-1:0] p_wdata [NP];
  logic [DW-1:0] a_rdata;

  logic [DW-1:0] rgbf_q, roif_q, dispf_q;
  logic          rgbf_empty, roif_empty, dispf_empty, rgbf_full, roif_full, dispf_full;
  logic [CNTW-1:0] rgbf_cnt, roif_cnt, dispf_cnt;

  sync_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_rgb_wfifo (
    .clk, .rst_n, .wr_en(rgb_push), .wr_data(rgb_push_data), .rd_en(p_wpop[0]),
    .rd_data(rgbf_q), .empty(rgbf_empty), .full(rgbf_full), .count(rgbf_cnt));

  sync_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_roi_wfifo (
    .clk, .rst_n, .wr_en(roi_push), .wr_data(roi_push_data), .rd_en(p_wpop[1]),
    .rd_data(roif_q), .empty(roif_empty), .full(roif_full), .count(roif_cnt));

  ddr_write_ctrl #(.FRAME_WORDS(RGB_WORDS), .BURST(BURST), .CNTW(CNTW)) u_rgb_wctrl (
    .clk, .rst_n, .frame_start, .frame_base(rgb_wr_base), .fifo_count(rgbf_cnt),
    .req(p_req[0]), .req_info(p_info[0]), .gnt(p_gnt[0]), .done(p_done[0]));

  ddr_write_ctrl #(.FRAME_WORDS(ROI_WORDS), .BURST(ROI_WPR), .CNTW(CNTW)) u_roi_wctrl (
    .clk, .rst_n, .frame_start, .frame_base(roi_wr_base), .fifo_count(roif_cnt),
    .req(p_req[1]), .req_info(p_info[1]), .gnt(p_gnt[1]), .done(p_done[1]));

  assign p_wdata[0] = rgbf_q;
  assign p_wdata[1] = roif_q;
  assign p_wdata[2] = '0;
  assign p_wdata[3] = '0;

  logic          cmd_valid, cmd_ready, bc_wpop, bc_rvalid, bc_done;
  mem_req_t      cmd;
  logic [DW-1:0] bc_wdata, bc_rdata;

  ddr_arbiter #(.N(NP)) u_arb (
    .clk, .rst_n, .req(p_req), .req_info(p_info), .gnt(p_gnt), .done(p_done),
    .wdata(p_wdata), .wpop(p_wpop), .rvalid(p_rvalid), .rdata(a_rdata),
    .cmd_valid, .cmd, .cmd_ready, .bc_wpop, .bc_wdata, .bc_rvalid, .bc_rdata, .bc_done);

  ddr_burst_ctrl u_burst (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .wpop(bc_wpop), .wdata(bc_wdata),
    .rvalid(bc_rvalid), .rdata(bc_rdata), .done(bc_done),
    .mem_cmd_en, .mem_cmd_instr, .mem_cmd_byte_addr, .mem_cmd_bl, .mem_cmd_full,
    .mem_wr_en, .mem_wr_data, .mem_wr_full, .mem_rd_en, .mem_rd_data, .mem_rd_empty);

  // ---------------------------------------------------------------- tracking
  logic       tracking;
  logic [1:0] since_init;
  logic       trk_start, fs_d;
  logic [1:0] trk_slot_q;
  logic       cs_valid, cs_lost, cs_busy;
  box_t       cs_box;
  logic [$clog2(GRID*GRID)-1:0] cs_best;
  logic [39:0] cs_m00;
  logic [CW-1:0] pred_x, pred_y, fin_cx, fin_cy;
  logic       kc_valid, kc_used;
  box_t       kc_box, kc_kbox;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs_d <= 1'b0; tracking <= 1'b0; since_init <= '0; trk_slot_q <= '0; cur_box <= '0;
    end else begin
      fs_d <= frame_start;
      if (init) begin
        tracking <= 1'b1; since_init <= '0; cur_box <= init_box;
      end else begin
        if (frame_start && tracking && since_init != 2'd3) since_init <= since_init + 1'b1;
        if (kc_valid) cur_box <= kc_box;
      end
      if (trk_start) trk_slot_q <= trk_slot;
    end
  end

  // Track frame N-1 from the cycle after frame N's start, when the slots have moved.
  assign trk_start = fs_d && tracking && (since_init == 2'd3) && !cs_busy;

  camshift_tracker #(.H_ACT(H_ACT), .V_ACT(V_ACT), .SW(SW), .SH(SH), .GRID(GRID),
                     .MIN_BOX(MIN_BOX), .MAX_BOX(MAX_BOX)) u_track (
    .clk, .rst_n, .start(trk_start), .frame_base(roi_trk_base), .prev_box(cur_box),
    .req(p_req[2]), .req_info(p_info[2]), .gnt(p_gnt[2]), .burst_done(p_done[2]),
    .rvalid(p_rvalid[2]), .rdata(a_rdata),
    .busy(cs_busy), .result_valid(cs_valid), .result_box(cs_box), .lost(cs_lost),
    .best_cand(cs_best), .best_m00(cs_m00));

  kalman_predictor #(.H_ACT(H_ACT), .V_ACT(V_ACT)) u_kpred (
    .clk, .rst_n, .init,
    .init_x(CW'((int'(init_box.x0) + int'(init_box.x1)) / 2)),
    .init_y(CW'((int'(init_box.y0) + int'(init_box.y1)) / 2)),
    .update(kc_valid), .meas_x(fin_cx), .meas_y(fin_cy), .pred_x, .pred_y);

  kalman_correction #(.H_ACT(H_ACT), .V_ACT(V_ACT)) u_kcorr (
    .clk, .rst_n, .in_valid(cs_valid), .cs_box, .cs_lost, .prev_box(cur_box),
    .pred_x, .pred_y, .size_thr, .out_valid(kc_valid), .final_box(kc_box),
    .used_kalman(kc_used), .kalman_box(kc_kbox), .final_cx(fin_cx), .final_cy(fin_cy));

  box_t res1_q, res2_q, fin_q;
  logic [3:0] slot_valid;

  result_ram u_res1 (.clk, .we(cs_valid), .waddr(trk_slot_q), .wdata(cs_box),
                     .raddr(disp_slot), .rdata(res1_q));
  result_ram u_res2 (.clk, .we(kc_valid), .waddr(trk_slot_q), .wdata(kc_kbox),
                     .raddr(disp_slot), .rdata(res2_q));
  result_ram u_resf (.clk, .we(kc_valid), .waddr(trk_slot_q), .wdata(kc_box),
                     .raddr(disp_slot), .rdata(fin_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_valid <= '0; track_valid <= 1'b0; track_box <= '0;
      track_used_kalman <= 1'b0; track_lost <= 1'b0;
    end else begin
      track_valid <= kc_valid;
      if (kc_valid) begin
        slot_valid[trk_slot_q] <= 1'b1;
        track_box <= kc_box;
        track_used_kalman <= kc_used;
      end
      if (cs_valid) track_lost <= cs_lost;
      // a slot that starts to receive a new frame has no box yet
      if (fs_d) slot_valid[wr_slot] <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- display
  logic          t_de, t_hs, t_vs, t_sof, t_eol, t_vbs;
  logic [CW-1:0] t_x, t_y;
  logic [1:0]    disp_n;
  logic          disp_pop;
  logic [23:0]   disp_px;
  logic          disp_en;

  video_timing_gen #(.H_ACT(H_ACT), .H_FP(H_FP), .H_SYNC(H_SYNC), .H_TOTAL(H_TOTAL),
                     .V_ACT(V_ACT), .V_FP(V_FP), .V_SYNC(V_SYNC), .V_TOTAL(V_TOTAL)) u_vtg (
    .clk, .rst_n, .de(t_de), .hsync(t_hs), .vsync(t_vs), .sof(t_sof), .eol(t_eol),
    .vblank_start(t_vbs), .x(t_x), .y(t_y));

  ddr_read_ctrl #(.FRAME_WORDS(RGB_WORDS), .BURST(BURST), .FIFO_DEPTH(FIFO_DEPTH),
                  .CNTW(CNTW)) u_disp_rctrl (
    .clk, .rst_n, .frame_start(t_vbs), .frame_base(rgb_disp_base), .fifo_count(dispf_cnt),
    .req(p_req[3]), .req_info(p_info[3]), .gnt(p_gnt[3]), .done(p_done[3]));

  sync_fifo #(.WIDTH(DW), .DEPTH(FIFO_DEPTH)) u_disp_rfifo (
    .clk, .rst_n, .wr_en(p_rvalid[3]), .wr_data(a_rdata), .rd_en(disp_pop),
    .rd_data(dispf_q), .empty(dispf_empty), .full(dispf_full), .count(dispf_cnt));

  assign disp_px  = dispf_empty ? 24'h0 : dispf_q[32*disp_n +: 24];
  assign disp_pop = t_de && !dispf_empty && (disp_n == 2'd3);
  assign disp_en  = slot_valid[disp_slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp_n <= '0; underflow_count <= '0;
    end else if (t_de) begin
      disp_n <= t_sof ? 2'd1 : disp_n + 2'd1;
      if (dispf_empty) underflow_count <= underflow_count + 1'b1;
    end
  end

  position_joiner #(.SIDE(3)) u_join (
    .clk, .rst_n, .enable(disp_en), .box(fin_q),
    .in_valid(t_de), .in_sof(t_sof), .in_eol(t_eol), .in_rgb(disp_px),
    .in_side({t_de, t_hs, t_vs}),
    .out_valid(), .out_rgb(vid_rgb), .out_side({vid_de, vid_hsync, vid_vsync}));

  logic unused;
  assign unused = ^{res1_q, res2_q, cs_best, cs_m00, mean_valid, rgbf_empty, roif_empty,
                    rgbf_full, roif_full, dispf_full, t_x, t_y, kc_used};
endmodule
