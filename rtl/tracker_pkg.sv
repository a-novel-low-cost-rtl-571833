// tracker_pkg: types and constants shared by the object-tracking pipeline.
//
// The system runs on one 148.5 MHz clock, the 1080p60 pixel clock. Video moves
// through it as a pixel stream qualified by `valid`, with `sof` marking the first
// active pixel of a frame and `eol` the last active pixel of a line. Frame buffers
// live in an external DDR3 device behind a memory-controller port that is DW bits
// wide; addresses on the internal request bus count DW-bit words.
//
// The 1080p frame size, the 148.5 MHz clock and the four-frame regions come from the
// paper. The 128-bit memory word, the box encoding and the address map are choices of
// this design.
package tracker_pkg;

  // 1080p60 (CEA-861) active size.
  localparam int unsigned H_ACTIVE = 1920;
  localparam int unsigned V_ACTIVE = 1080;

  // Width of a pixel coordinate and of a memory word address.
  localparam int unsigned CW  = 12;
  localparam int unsigned AW  = 24;   // 2 Gbit / 128 bit = 2^24 words
  localparam int unsigned DW  = 128;  // memory word: four RGB pixels or 128 ROI bits
  localparam int unsigned LW  = 7;    // burst length field (words, up to 64)

  // Bounding box, inclusive corners, in frame pixel coordinates.
  typedef struct packed {
    logic [CW-1:0] x0;
    logic [CW-1:0] y0;
    logic [CW-1:0] x1;
    logic [CW-1:0] y1;
  } box_t;

  // One burst request on the internal memory request bus.
  typedef struct packed {
    logic          write;   // 1: write burst, 0: read burst
    logic [AW-1:0] addr;    // first word
    logic [LW-1:0] len;     // number of words, 1..64
  } mem_req_t;

  // Spartan-6 memory-controller style command codes.
  localparam logic [2:0] CMD_WRITE = 3'b000;
  localparam logic [2:0] CMD_READ  = 3'b001;

  // DDR3 address map (in DW-bit words): two regions of four frame slots each.
  localparam logic [AW-1:0] RGB_REGION_BASE = 24'h00_0000;
  localparam logic [AW-1:0] RGB_SLOT_STRIDE = 24'h08_0000;   // 2^19 words >= 518,400
  localparam logic [AW-1:0] ROI_REGION_BASE = 24'h20_0000;
  localparam logic [AW-1:0] ROI_SLOT_STRIDE = 24'h00_4000;   // 2^14 words >= 16,200

  function automatic logic [CW-1:0] absdiff(input logic [CW-1:0] a, input logic [CW-1:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

endpackage
