// roi_addr_gen: address generator that copies the tracker's search region of the
// 1-bit ROI frame from DDR3 into the ROI map RAM.
//
// The ROI frame is stored row by row, DW pixels per word (bit i of a word is pixel
// DW*k+i of the row), H_ACT/DW words per row. For a search region of SW x SH pixels
// with its top-left corner at (org_x, org_y), org_x a multiple of DW, it issues one
// read burst of SW/DW words per row, one burst at a time, and writes the returned
// words to consecutive RAM addresses (row r, word k at r*SW/DW+k). `done` pulses
// when all SH rows are in the RAM.
module roi_addr_gen
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT = 1920,
  parameter int unsigned SW    = 512,
  parameter int unsigned SH    = 512
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] frame_base,
  input  logic [CW-1:0] org_x,
  input  logic [CW-1:0] org_y,
  // request port towards the arbiter
  output logic          req,
  output mem_req_t      req_info,
  input  logic          gnt,
  input  logic          burst_done,
  input  logic          rvalid,
  input  logic [DW-1:0] rdata,
  // ROI map RAM write port
  output logic          ram_we,
  output logic [$clog2(SW/DW*SH)-1:0] ram_waddr,
  output logic [DW-1:0] ram_wdata,
  output logic          done
);
  localparam int unsigned RW  = H_ACT / DW;     // words per frame row
  localparam int unsigned WPR = SW / DW;        // words per search row
  
  logic [AW-1:0]          row_addr;
  logic [$clog2(SH+1)-1:0] rows_left;
  logic                   busy, active;

  assign req_info.write = 1'b0;
  assign req_info.addr  = row_addr;
  assign req_info.len   = LW'(WPR);
  assign ram_we         = rvalid;
  assign ram_wdata      = rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_addr <= '0; rows_left <= '0; busy <= 1'b0; active <= 1'b0; req <= 1'b0;
      ram_waddr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rvalid) ram_waddr <= ram_waddr + 1'b1;
      if (start) begin
        row_addr  <= frame_base + AW'(org_y) * AW'(RW) + AW'(org_x / CW'(DW));
        rows_left <= ($clog2(SH+1))'(SH);
        active    <= 1'b1;
        busy      <= 1'b0;
        req       <= 1'b0;
        ram_waddr <= '0;
      end else if (active) begin
        if (req && gnt) begin
          req <= 1'b0; busy <= 1'b1;
        end else if (busy && burst_done) begin
          busy      <= 1'b0;
          row_addr  <= row_addr + AW'(RW);
          rows_left <= rows_left - 1'b1;
          if (rows_left == 1) begin
            active <= 1'b0; done <= 1'b1;
          end
        end else if (!req && !busy) begin
          req <= 1'b1;
        end
      end
    end
  end

  initial assert (SW % DW == 0 && H_ACT % DW == 0 && SW <= H_ACT && WPR <= 64);
endmodule
