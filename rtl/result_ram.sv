// result_ram: per-frame-slot store of bounding boxes (Result RAM 1 for the Camshift
// boxes, Result RAM 2 for the Kalman predictions, and the final boxes).
//
// One entry per DDR3 frame slot, so a box computed while frame N-1 is tracked waits
// in the RAM, under that frame's slot, until the frame is displayed. One write port;
// one read port with registered data (valid the cycle after the address). Written as
// an array; maps to distributed RAM.
module result_ram
  import tracker_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  box_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output box_t                     rdata
);
  box_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
