// tracker_tb_env: end-to-end environment for tracking_system_top, shared by the
// reduced-size and the full-size testbench.
//
// A camera model sends frames with the display's raster timing: a mid-grey
// background with a red square (side OBJ) that moves by (DX, DY) pixels per frame and
// is absent in frame LOST_FRAME. The behavioural DDR3 model (with random
// back-pressure) serves the memory port. Tracking is started with `init` on a box
// inside the square before frame 0.
//
// Checked: every final box for a frame in which Camshift was used is centred within
// a quarter of the square's side of the square as the ROI sees it (the 3x3 closing moves the image by
// (2,2)); each tracking result arrives before the next frame starts; the frame with
// no object is reported lost and corrected by the Kalman predictor; displayed frames
// that carry a box show the outline colour and the red object; the display FIFO does
// not run dry once the pipeline is full. Mechanisms counted (each must occur):
// Camshift result used, Kalman correction used, object lost, arbiter requests
// colliding, memory back-pressure, frame-slot wrap-around, box drawn on display.
module tracker_tb_env #(
  parameter bit SMALL = 1'b1
);
  import tracker_pkg::*;
  localparam int H   = SMALL ? 256 : 1920;
  localparam int V   = SMALL ? 128 : 1080;
  localparam int HT  = SMALL ? 300 : 2200;
  localparam int VT  = SMALL ? 140 : 1125;
  localparam int OBJ = SMALL ? 20 : 40;
  localparam int DX  = SMALL ? 4 : 12;
  localparam int DY  = SMALL ? 2 : 6;
  localparam int X0  = SMALL ? 60 : 800;
  localparam int Y0  = SMALL ? 40 : 500;
  localparam int TOL = OBJ / 4;   // one weighted step trails a fast object
  localparam int NFRAMES    = SMALL ? 12 : 7;
  localparam int LOST_FRAME = SMALL ? 6 : 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cam_valid = 0, cam_sof = 0, cam_eol = 0;
  logic [7:0] cam_y = 0, cam_c = 0;
  logic init = 0;
  box_t init_box = '0;
  logic mem_cmd_en, mem_cmd_full, mem_wr_en, mem_wr_full, mem_rd_en, mem_rd_empty;
  logic [2:0] mem_cmd_instr;
  logic [29:0] mem_cmd_byte_addr;
  logic [5:0] mem_cmd_bl;
  logic [DW-1:0] mem_wr_data, mem_rd_data;
  logic vid_de, vid_hsync, vid_vsync;
  logic [23:0] vid_rgb;
  box_t track_box;
  logic track_valid, track_used_kalman, track_lost;
  logic [31:0] frame_count, underflow_count;
  logic [3:0] req_vec;

  if (SMALL) begin : g_dut
    tracking_system_top #(.H_ACT(256), .V_ACT(128), .H_FP(8), .H_SYNC(8), .H_TOTAL(300),
                          .V_FP(2), .V_SYNC(2), .V_TOTAL(140), .SW(128), .SH(128),
                          .MIN_BOX(8), .MAX_BOX(48)) u_dut (
      .clk, .rst_n, .cam_valid, .cam_sof, .cam_eol, .cam_y, .cam_c, .init, .init_box,
      .thr_h(8'd20), .thr_s(8'd40), .thr_v(8'd40), .thr_a(8'd30),
      .alpha(9'd86), .beta(9'd85), .gamma(9'd85), .size_thr(12'd6), .*);
    assign req_vec = u_dut.p_req;
  end else begin : g_dut
    tracking_system_top u_dut (
      .clk, .rst_n, .cam_valid, .cam_sof, .cam_eol, .cam_y, .cam_c, .init, .init_box,
      .thr_h(8'd20), .thr_s(8'd40), .thr_v(8'd40), .thr_a(8'd30),
      .alpha(9'd86), .beta(9'd85), .gamma(9'd85), .size_thr(12'd6), .*);
    assign req_vec = u_dut.p_req;
  end

  ddr3_model #(.DW(DW), .RD_LAT(8), .STALL(1)) u_mem (.*);

  int checks = 0, failures = 0;
  int n_cs = 0, n_kalman = 0, n_lost = 0, n_collide = 0, n_held = 0, n_drawn = 0, n_red = 0;
  int cam_frame = -1;
  bit done_result [64];
  int uf_at_frame3 = -1;

  function automatic int obj_x(int f); return X0 + DX * f; endfunction
  function automatic int obj_y(int f); return Y0 + DY * f; endfunction

  // watchdog
  initial begin
    repeat ((NFRAMES + 2) * HT * VT) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // camera
  initial begin
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (20) @(posedge clk);
    @(negedge clk);
    init = 1;
    init_box = '{x0: CW'(obj_x(0) + 4), y0: CW'(obj_y(0) + 4), x1: CW'(obj_x(0) + OBJ - 3), y1: CW'(obj_y(0) + OBJ - 3)};
    @(negedge clk); init = 0;
    for (int f = 0; f < NFRAMES; f++) begin
      cam_frame = f;
      for (int y = 0; y < VT; y++) begin
        for (int x = 0; x < HT; x++) begin
          bit obj;
          @(negedge clk);
          cam_valid = (x < H && y < V);
          cam_sof = cam_valid && x == 0 && y == 0;
          cam_eol = cam_valid && x == H - 1;
          obj = (f != LOST_FRAME) && x >= obj_x(f) && x < obj_x(f) + OBJ && y >= obj_y(f) && y < obj_y(f) + OBJ;
          cam_y = obj ? 8'd73 : 8'd126;
          cam_c = obj ? ((x % 2 == 0) ? 8'd111 : 8'd203) : 8'd128;
        end
      end
    end
    @(negedge clk); cam_valid = 0;
    // mechanisms
    checks++; if (n_cs == 0)      begin failures++; $display("Camshift result never used"); end
    checks++; if (n_kalman == 0)  begin failures++; $display("Kalman correction never used"); end
    checks++; if (n_lost == 0)    begin failures++; $display("object never lost"); end
    checks++; if (n_collide == 0) begin failures++; $display("no arbiter collision"); end
    checks++; if (n_held == 0)    begin failures++; $display("no memory back-pressure"); end
    checks++; if (frame_count < 5) begin failures++; $display("slots never wrapped"); end
    checks++; if (n_drawn == 0 || n_red == 0) begin failures++; $display("display: drawn %0d red %0d", n_drawn, n_red); end
    checks++; if (underflow_count != 32'(uf_at_frame3)) begin failures++; $display("display underflow %0d after frame 3 (%0d before)", underflow_count, uf_at_frame3); end
    $display("mechanisms: camshift %0d kalman %0d lost %0d collisions %0d back-pressure %0d drawn-pixels %0d frames %0d",
             n_cs, n_kalman, n_lost, n_collide, n_held, n_drawn, frame_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if ($countones(req_vec) >= 2) n_collide++;
    if (!g_dut.u_dut.cmd_ready && (mem_wr_full || mem_cmd_full)) n_held++;
    if (cam_sof && cam_valid && cam_frame == 3) uf_at_frame3 = int'(underflow_count);
    // a result belongs to the frame before the one being captured
    if (track_valid) begin
      int f, ex, ey, cx, cy;
      f = cam_frame - 1;
      ex = obj_x(f) + OBJ / 2 + 2; ey = obj_y(f) + OBJ / 2 + 2;
      cx = (int'(track_box.x0) + int'(track_box.x1)) / 2; cy = (int'(track_box.y0) + int'(track_box.y1)) / 2;
      checks++;
      if (f < 0 || done_result[f]) begin failures++; $display("second result for frame %0d", f); end
      else done_result[f] = 1;
      if (track_lost) n_lost++;
      if (track_used_kalman) n_kalman++; else n_cs++;
      if (f == LOST_FRAME) begin
        checks++;
        if (!track_lost || !track_used_kalman) begin failures++; $display("frame %0d without object not handled", f); end
      end else if (!track_used_kalman) begin
        checks++;
        if (cx < ex - TOL || cx > ex + TOL || cy < ey - TOL || cy > ey + TOL) begin
          failures++; $display("frame %0d box centre %0d,%0d object %0d,%0d", f, cx, cy, ex, ey);
        end
      end
      $display("frame %0d: box (%0d,%0d)-(%0d,%0d) object centre (%0d,%0d)%s%s", f, track_box.x0, track_box.y0,
               track_box.x1, track_box.y1, ex, ey, track_used_kalman ? " kalman" : " camshift", track_lost ? " lost" : "");
    end
    if (vid_de && vid_rgb == 24'hFF00FF) n_drawn++;
    if (vid_de && vid_rgb[23:16] > 150 && vid_rgb[15:8] < 80) n_red++;
  end

  // every started frame (from frame 2 on) must have its result before the next starts
  always @(posedge clk) if (rst_n && cam_valid && cam_sof && cam_frame >= 3) begin
    checks++;
    if (!done_result[cam_frame - 2]) begin failures++; $display("no result for frame %0d in time", cam_frame - 2); end
  end
endmodule
