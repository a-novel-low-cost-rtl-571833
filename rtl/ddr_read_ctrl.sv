// ddr_read_ctrl: read controller of one DDR3 read channel (display read-out).
//
// After `frame_start` it reads the frame at `frame_base` front to back, one burst of
// BURST words at a time, whenever its read FIFO has room for a whole burst. One
// request is outstanding at a time: `req` holds until `gnt`, the address advances at
// `done`, when the burst's words are in the FIFO. It stops after FRAME_WORDS words.
// A `frame_start` while a burst is in flight is taken once that burst is done.
module ddr_read_ctrl
  import tracker_pkg::*;
#(
  parameter int unsigned FRAME_WORDS = 518400,
  parameter int unsigned BURST       = 32,
  parameter int unsigned FIFO_DEPTH  = 256,
  parameter int unsigned CNTW        = 9
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

  assign req_info.write = 1'b0;
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
      end else if (!req && !busy && 32'(offset) < FRAME_WORDS &&
                   32'(fifo_count) + BURST <= FIFO_DEPTH) begin
        req <= 1'b1;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n) req && !gnt |=> req);
endmodule
