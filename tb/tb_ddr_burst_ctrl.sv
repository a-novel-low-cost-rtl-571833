// tb_ddr_burst_ctrl: the burst controller in front of the behavioural DDR3 model with
// random back-pressure. Write bursts of random length and address carry numbered
// words from a source queue; read bursts then fetch the same addresses and must
// return the same words in order. Also checked: one `done` per burst, `cmd_ready`
// only when idle, and that back-pressure really occurred.
module tb_ddr_burst_ctrl;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, wpop, rvalid, done;
  mem_req_t cmd = '0;
  logic [DW-1:0] wdata, rdata;
  logic mem_cmd_en, mem_cmd_full, mem_wr_en, mem_wr_full, mem_rd_en, mem_rd_empty;
  logic [2:0] mem_cmd_instr;
  logic [29:0] mem_cmd_byte_addr;
  logic [5:0] mem_cmd_bl;
  logic [DW-1:0] mem_wr_data, mem_rd_data;
  int checks = 0, failures = 0, dones = 0;
  logic [DW-1:0] src [$];
  logic [DW-1:0] expq [$];

  ddr_burst_ctrl dut (.*);
  ddr3_model #(.DW(DW), .RD_LAT(6), .STALL(1)) u_mem (.*);

  assign wdata = (src.size() != 0) ? src[0] : '0;
  // the source FIFO is popped between clock edges so the model samples a stable word
  logic popped = 1'b0;
  always @(posedge clk) popped <= rst_n && wpop;
  always @(negedge clk) if (popped) void'(src.pop_front());
  int held = 0;   // cycles in which a full flag held the controller back
  always @(posedge clk) begin
    if (rst_n && done) dones++;
    if (rst_n && !cmd_ready && (mem_wr_full || mem_cmd_full) && !mem_wr_en && !mem_cmd_en && !rvalid) held++;
    if (rvalid) begin
      checks++;
      if (rdata !== expq[0]) begin failures++; $display("read %h exp %h", rdata, expq[0]); end
      void'(expq.pop_front());
    end
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("timeout: state %0d dones %0d src %0d cq %0d wq %0d rq %0d", dut.state, dones, src.size(), u_mem.cq.size(), u_mem.wq.size(), u_mem.rq.size());
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic burst(input bit wr, input int addr, input int len);
    wait (cmd_ready); @(negedge clk);
    cmd_valid = 1; cmd = '{write: wr, addr: AW'(addr), len: LW'(len)};
    @(negedge clk); cmd_valid = 0;
    checks++; if (cmd_ready) begin failures++; $display("ready while busy"); end
    wait (done); @(negedge clk);
  endtask

  initial begin
    int addrs [8]; int lens [8]; logic [DW-1:0] data [8][$];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      addrs[b] = b * 200 + $urandom_range(0, 50); lens[b] = $urandom_range(1, 64);
      for (int i = 0; i < lens[b]; i++) begin
        logic [DW-1:0] w; w = {$urandom, $urandom, $urandom, $urandom};
        src.push_back(w); data[b].push_back(w);
      end
      burst(1, addrs[b], lens[b]);
    end
    checks++; if (src.size() != 0) begin failures++; $display("%0d words not taken", src.size()); end
    for (int b = 7; b >= 0; b--) begin
      foreach (data[b][i]) expq.push_back(data[b][i]);
      burst(0, addrs[b], lens[b]);
    end
    repeat (5) @(posedge clk);
    checks++; if (dones != 16 || expq.size() != 0) begin failures++; $display("dones %0d", dones); end
    checks++; if (held == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
