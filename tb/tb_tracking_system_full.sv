// tb_tracking_system_full: the whole tracker with every parameter at its default
// (1080p60 raster, 512x512 search region), seven full camera frames with the checks
// of tracker_tb_env: tracking from the third frame on, a frame without the object
// handled by the Kalman predictor, and the boxed video on the display output.
module tb_tracking_system_full;
  tracker_tb_env #(.SMALL(1'b0)) env ();
endmodule
