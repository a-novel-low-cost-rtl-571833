// ddr3_model: behavioural model of the DDR3 device together with the FPGA's hard
// memory controller, seen through its user port (command FIFO, write-data FIFO,
// first-word-fall-through read-data FIFO). Not synthesizable; for testbenches only.
//
// Storage is a sparse associative array of DW-bit words addressed by byte address/16.
// Commands run one at a time: a write takes bl+1 words from the write-data FIFO;
// a read returns bl+1 words into the read-data FIFO, the first RD_LAT cycles after
// the command, then one per cycle. With STALL set the full flags are raised at random
// (about one cycle in eight) to exercise the controller's back-pressure; `stalls`
// counts the cycles in which a flag blocked a request.
module ddr3_model #(
  parameter int unsigned DW     = 128,
  parameter int unsigned RD_LAT = 8,
  parameter bit          STALL  = 1'b0
) (
  input  logic          clk,
  input  logic          mem_cmd_en,
  input  logic [2:0]    mem_cmd_instr,
  input  logic [29:0]   mem_cmd_byte_addr,
  input  logic [5:0]    mem_cmd_bl,
  output logic          mem_cmd_full,
  input  logic          mem_wr_en,
  input  logic [DW-1:0] mem_wr_data,
  output logic          mem_wr_full,
  input  logic          mem_rd_en,
  output logic [DW-1:0] mem_rd_data,
  output logic          mem_rd_empty
);
  typedef struct { logic [2:0] instr; logic [29:0] addr; int n; } cmd_t;

  logic [DW-1:0] mem [int unsigned];
  logic [DW-1:0] wq [$];
  logic [DW-1:0] rq [$];
  cmd_t          cq [$];
  int unsigned   stalls = 0;
  logic          rnd_full;
  int            busy_cnt = 0;
  int            done_n = 0;

  initial begin mem_cmd_full = 1'b1; mem_wr_full = 1'b1; mem_rd_empty = 1'b1; mem_rd_data = '0; end

  function automatic logic [DW-1:0] peek(input int unsigned word_addr);
    return mem.exists(word_addr) ? mem[word_addr] : '0;
  endfunction

  always @(posedge clk) begin
    if ((mem_cmd_en && mem_cmd_full) || (mem_wr_en && mem_wr_full)) stalls++;
    if (mem_cmd_en && !mem_cmd_full)
      cq.push_back('{instr: mem_cmd_instr, addr: mem_cmd_byte_addr, n: int'(mem_cmd_bl) + 1});
    if (mem_wr_en && !mem_wr_full) wq.push_back(mem_wr_data);
    if (mem_rd_en && !mem_rd_empty) void'(rq.pop_front());
    rnd_full = STALL ? ($urandom_range(0, 7) == 0) : 1'b0;
    // execute the oldest command
    if (cq.size() != 0) begin
      if (cq[0].instr == 3'b000) begin
        if (wq.size() >= cq[0].n) begin
          for (int i = 0; i < cq[0].n; i++) mem[cq[0].addr / 16 + i] = wq.pop_front();
          void'(cq.pop_front());
        end
      end else begin
        if (busy_cnt < int'(RD_LAT)) busy_cnt++;
        else begin
          rq.push_back(peek(cq[0].addr / 16 + done_n));
          done_n++;
          if (done_n == cq[0].n) begin
            void'(cq.pop_front()); done_n = 0; busy_cnt = 0;
          end
        end
      end
    end
    // flags are registered: they show the state after this clock edge
    mem_cmd_full <= (cq.size() >= 4) || rnd_full;
    mem_wr_full  <= (wq.size() >= 64) || rnd_full;
    mem_rd_empty <= (rq.size() == 0);
    mem_rd_data  <= (rq.size() != 0) ? rq[0] : '0;
  end
endmodule
