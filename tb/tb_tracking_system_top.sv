// tb_tracking_system_top: end-to-end run of the whole tracker at a reduced frame size
// (256x128 active, 300x140 raster, 128x128 search region), twelve frames. The
// scene, the checks and the mechanisms counted are described in tracker_tb_env.
module tb_tracking_system_top;
  tracker_tb_env #(.SMALL(1'b1)) env ();
endmodule
