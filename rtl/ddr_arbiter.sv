// ddr_arbiter: the write-read arbiter that shares the single DDR3 port among the
// channels' burst requests.
//
// Each of N ports raises `req` with a mem_req_t (direction, word address, length).
// When the burst controller is ready, the arbiter grants one port, round robin
// starting after the last winner, presents its request to the burst controller in
// the same cycle and pulses that port's `gnt`. The port owns the data paths until
// the burst controller reports `bc_done`, which is passed on as the port's `done`:
// write data are taken from the owner's FIFO head (`wdata`, popped by `wpop`), read
// data are delivered with the owner's `rvalid`. Read channels and write channels are
// the same kind of port, so writing the camera frames and the three reads run
// interleaved burst by burst.
module ddr_arbiter
  import tracker_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // requesting ports
  input  logic [N-1:0]    req,
  input  mem_req_t        req_info [N],
  output logic [N-1:0]    gnt,
  output logic [N-1:0]    done,
  input  logic [DW-1:0]   wdata [N],
  output logic [N-1:0]    wpop,
  output logic [N-1:0]    rvalid,
  output logic [DW-1:0]   rdata,
  // burst controller
  output logic            cmd_valid,
  output mem_req_t        cmd,
  input  logic            cmd_ready,
  input  logic            bc_wpop,
  output logic [DW-1:0]   bc_wdata,
  input  logic            bc_rvalid,
  input  logic [DW-1:0]   bc_rdata,
  input  logic            bc_done
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          active;
  logic [IW-1:0] owner, last, sel;
  logic          any;

  // Round robin: the first requester after the last winner.
  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int k = N; k >= 1; k--) begin
      int idx;
      idx = (int'(last) + k) % N;
      if (req[idx]) begin
        sel = IW'(idx);
        any = 1'b1;
      end
    end
  end

  assign cmd_valid = !active && any && cmd_ready;
  assign cmd       = req_info[sel];
  assign bc_wdata  = wdata[owner];
  assign rdata     = bc_rdata;

  always_comb begin
    gnt = '0; done = '0; wpop = '0; rvalid = '0;
    if (cmd_valid) gnt[sel] = 1'b1;
    if (active) begin
      done[owner]   = bc_done;
      wpop[owner]   = bc_wpop;
      rvalid[owner] = bc_rvalid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; owner <= '0; last <= IW'(N - 1);
    end else begin
      if (cmd_valid) begin
        active <= 1'b1; owner <= sel; last <= sel;
      end else if (active && bc_done) begin
        active <= 1'b0;
      end
    end
  end

  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_no_stray:   assert property (@(posedge clk) disable iff (!rst_n) !active |-> !(bc_wpop || bc_rvalid));
endmodule
