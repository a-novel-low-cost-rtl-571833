// ddr_burst_ctrl: runs one granted burst on the DDR3 memory controller's user port.
//
// The user port follows the Spartan-6 memory controller block: a command FIFO
// (cmd_en, instr, byte address, burst length minus one), a write-data FIFO and a
// first-word-fall-through read-data FIFO, each with a full/empty flag.
//   write burst: copy `len` words from the owner's FIFO into the write-data FIFO
//                (one per cycle while not full), then post the write command;
//   read burst:  post the read command, then move `len` words from the read-data
//                FIFO to the owner (one per cycle while not empty).
// `done` pulses for one cycle after the last word or command; `cmd_ready` is high
// only when idle. Stalls come only from the controller's full/empty flags.
module ddr_burst_ctrl
  import tracker_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // from the arbiter
  input  logic          cmd_valid,
  input  mem_req_t      cmd,
  output logic          cmd_ready,
  output logic          wpop,
  input  logic [DW-1:0] wdata,
  output logic          rvalid,
  output logic [DW-1:0] rdata,
  output logic          done,
  // memory controller user port
  output logic          mem_cmd_en,
  output logic [2:0]    mem_cmd_instr,
  output logic [29:0]   mem_cmd_byte_addr,
  output logic [5:0]    mem_cmd_bl,
  input  logic          mem_cmd_full,
  output logic          mem_wr_en,
  output logic [DW-1:0] mem_wr_data,
  input  logic          mem_wr_full,
  output logic          mem_rd_en,
  input  logic [DW-1:0] mem_rd_data,
  input  logic          mem_rd_empty
);
  typedef enum logic [2:0] {IDLE, WDATA, WCMD, RCMD, RDATA, DONE} state_e;
  state_e     state;
  mem_req_t   cur;
  logic [LW-1:0] n;

  assign cmd_ready         = (state == IDLE);
  assign mem_cmd_byte_addr = 30'({cur.addr, 4'b0000});
  assign mem_cmd_bl        = 6'(cur.len - 1'b1);
  assign mem_cmd_instr     = cur.write ? CMD_WRITE : CMD_READ;
  assign mem_cmd_en        = ((state == WCMD) || (state == RCMD)) && !mem_cmd_full;
  assign mem_wr_en         = (state == WDATA) && !mem_wr_full;
  assign mem_wr_data       = wdata;
  assign wpop              = mem_wr_en;
  assign mem_rd_en         = (state == RDATA) && !mem_rd_empty;
  assign rvalid            = mem_rd_en;
  assign rdata             = mem_rd_data;
  assign done              = (state == DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cur <= '0; n <= '0;
    end else begin
      unique case (state)
        IDLE:  if (cmd_valid) begin
                 cur <= cmd; n <= '0;
                 state <= cmd.write ? WDATA : RCMD;
               end
        WDATA: if (mem_wr_en) begin
                 n <= n + 1'b1;
                 if (n + 1'b1 == cur.len) state <= WCMD;
               end
        WCMD:  if (mem_cmd_en) state <= DONE;
        RCMD:  if (mem_cmd_en) state <= RDATA;
        RDATA: if (mem_rd_en) begin
                 n <= n + 1'b1;
                 if (n + 1'b1 == cur.len) state <= DONE;
               end
        DONE:  state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && cmd_ready |-> cmd.len != 0 && cmd.len <= 64);
endmodule
