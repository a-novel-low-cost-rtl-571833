// roi_map_ram: on-chip buffer for the tracker's search region of the ROI bit map.
//
// Simple dual-port RAM of DEPTH words of DW bits (DW = 128 ROI pixels per word): one
// write port filled from DDR3 by the address generator, one read port scanned by the
// tracker. Reads are registered: data appear the cycle after the address. The
// default 2048 x 128 bits holds a 512 x 512 pixel region (256 Kbit of block RAM).
module roi_map_ram
  import tracker_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [DW-1:0]            wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [DW-1:0]            rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
