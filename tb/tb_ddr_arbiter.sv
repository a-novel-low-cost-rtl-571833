// tb_ddr_arbiter: four ports request bursts at random; a modelled burst controller
// accepts a command when idle, moves `len` words and reports done. Checks: only one
// grant at a time, the granted port is the first requester after the last winner
// (round robin), the command is that port's, write data come from the owner's FIFO
// head, read data reach only the owner, done goes to the owner, and every port is
// served.
module tb_ddr_arbiter;
  import tracker_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req = 0, gnt, done, wpop, rvalid;
  mem_req_t req_info [N];
  logic [DW-1:0] wdata [N];
  logic [DW-1:0] rdata, bc_wdata, bc_rdata = 0;
  logic cmd_valid, cmd_ready = 0, bc_wpop = 0, bc_rvalid = 0, bc_done = 0;
  mem_req_t cmd;
  int checks = 0, failures = 0, last = N - 1, owner = -1;
  int served [N];

  ddr_arbiter #(.N(N)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar i = 0; i < N; i++) begin : g
    assign wdata[i] = DW'(32'hA000 + i);
    assign req_info[i] = '{write: (i < 2), addr: AW'(i * 100), len: LW'(4 + i)};
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      int exp_sel;
      @(negedge clk);
      for (int i = 0; i < N; i++) if (!req[i]) req[i] = ($urandom_range(0, 2) != 0);
      cmd_ready = 1;
      #1;
      exp_sel = -1;
      for (int j = 1; j <= N; j++) if (exp_sel < 0 && req[(last + j) % N]) exp_sel = (last + j) % N;
      checks++;
      if (exp_sel < 0) begin
        if (cmd_valid) failures++;
        cmd_ready = 0;
        continue;
      end
      if (!cmd_valid || gnt != (1 << exp_sel) || cmd != req_info[exp_sel]) begin
        failures++; $display("grant %b exp port %0d", gnt, exp_sel);
      end
      owner = exp_sel; last = exp_sel; served[owner]++;
      @(negedge clk);
      req[owner] = 0; cmd_ready = 0;
      for (int w = 0; w < int'(req_info[owner].len); w++) begin
        if (req_info[owner].write) begin
          bc_wpop = 1; #1;
          checks++;
          if (wpop != (1 << owner) || bc_wdata != wdata[owner]) begin failures++; $display("wdata path"); end
        end else begin
          bc_rvalid = 1; bc_rdata = DW'($urandom); #1;
          checks++;
          if (rvalid != (1 << owner) || rdata != bc_rdata) begin failures++; $display("rdata path"); end
        end
        if (cmd_valid) begin failures++; $display("second grant while busy"); end
        @(negedge clk); bc_wpop = 0; bc_rvalid = 0;
      end
      bc_done = 1; #1;
      checks++; if (done != (1 << owner)) failures++;
      @(negedge clk); bc_done = 0;
    end
    for (int i = 0; i < N; i++) begin checks++; if (served[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
