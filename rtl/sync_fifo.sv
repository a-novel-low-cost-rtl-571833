// sync_fifo: single-clock first-word-fall-through FIFO.
//
// `rd_data` shows the oldest word whenever `empty` is low; `rd_en` removes it.
// `count` gives the fill level so that the memory controllers can wait for a whole
// burst (write side) or for room for one (read side). A write while full or a read
// while empty is an error and is flagged by an assertion; the FIFO ignores it.
// DEPTH must be a power of two. These are the write and read FIFOs that sit
// between the video streams and the DDR3 controllers.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW:0] wp, rp;
  logic do_wr, do_rd;

  assign empty   = (wp == rp);
  assign full    = (wp[PW] != rp[PW]) && (wp[PW-1:0] == rp[PW-1:0]);
  assign count   = wp - rp;
  assign rd_data = mem[rp[PW-1:0]];
  assign do_wr   = wr_en & ~full;
  assign do_rd   = rd_en & ~empty;

  always_ff @(posedge clk) if (do_wr) mem[wp[PW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
