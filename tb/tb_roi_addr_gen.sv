// tb_roi_addr_gen: a 256-pixel-wide frame (2 words per row), a 128 x 6 search region
// at (128, 3). Each request must be a read of one word at base + (3+r)*2 + 1, rows in
// order; the returned words must be written to RAM addresses 0..5, and `done` must
// pulse after the last row.
module tb_roi_addr_gen;
  import tracker_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, gnt = 0, burst_done = 0, rvalid = 0, req, ram_we, done;
  logic [AW-1:0] frame_base = 24'h300;
  logic [CW-1:0] org_x = 128, org_y = 3;
  mem_req_t req_info;
  logic [DW-1:0] rdata = 0, ram_wdata;
  logic [2:0] ram_waddr;
  int checks = 0, failures = 0, rows = 0, dones = 0;

  roi_addr_gen #(.H_ACT(256), .SW(128), .SH(6)) dut (.*);
  always @(posedge clk) if (rst_n && done) dones++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (rows < 6) begin
      @(negedge clk);
      if (req) begin
        checks++;
        if (req_info.write || req_info.len != 1 || req_info.addr != AW'('h300 + (3 + rows) * 2 + 1)) begin
          failures++; $display("row %0d addr %h", rows, req_info.addr);
        end
        gnt = 1; @(negedge clk); gnt = 0;
        repeat (3) @(negedge clk);
        rvalid = 1; rdata = DW'(rows * 7 + 1); #1;
        checks++;
        if (!ram_we || ram_waddr != 3'(rows) || ram_wdata != rdata) begin failures++; $display("ram write"); end
        @(negedge clk); rvalid = 0;
        burst_done = 1; @(negedge clk); burst_done = 0;
        rows++;
      end
    end
    repeat (5) @(negedge clk);
    checks++; if (dones != 1 || req) begin failures++; $display("dones %0d req %0d", dones, req); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
