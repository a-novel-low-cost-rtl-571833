// ddr_write_ctrl: write controller of one DDR3 write channel.
//
// It watches its write FIFO and, whenever at least BURST words are waiting, asks
// the arbiter for a write burst of BURST words at the next address of the current
// frame slot. `frame_start` (the frame's first pixel) restarts the address at
// `frame_base`, once a burst still in flight has finished. One request is outstanding at a time: `req` stays high until
// `gnt`, and the next request waits for `done`, when the burst's data have left the
// FIFO. Writes beyond FRAME_WORDS are not requested. FRAME_WORDS must be a multiple
// of BURST so that no words are left over at the end of a frame.
module ddr_write_ctrl
  import tracker_pkg::*;
#(
  parameter int unsigned FRAME_WORDS = 518400,
  parameter int unsigned BURST       = 32,
  parameter int unsigned CNTW        = 9     // width of the FIFO count input
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            frame_start,
  input  logic [AW-1:0]   frame_base,
  input  logic [CNTW-1:0] fifo_count,
  output logic            req,
  output mem_req_t        req_info,
  input  logic            gnt,
  input  logic            done
);
  logic [AW-1:0] base, offset;
  logic          busy, restart;

  assign req_info.write = 1'b1;
  assign req_info.addr  = base + offset;
  assign req_info.len   = LW'(BURST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0; offset <= AW'(FRAME_WORDS); busy <= 1'b0; req <= 1'b0; restart <= 1'b0;
    end else begin
      if (frame_start) restart <= 1'b1;
      if (req && gnt) begin
        req <= 1'b0; busy <= 1'b1;
      end else if (busy && done) begin
        busy <= 1'b0; offset <= offset + AW'(BURST);
      end else if (!req && !busy && restart) begin
        base <= frame_base; offset <= '0; restart <= 1'b0;
      end else if (!req && !busy && 32'(fifo_count) >= BURST && 32'(offset) < FRAME_WORDS) begin
        req <= 1'b1;
      end
    end
  end

  initial assert (FRAME_WORDS % BURST == 0);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n) req && !gnt |=> req);
endmodule
