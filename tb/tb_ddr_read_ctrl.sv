// tb_ddr_read_ctrl: a modelled read FIFO of 32 words drained at one word every
// three cycles. Read bursts must run front to back through the frame, never
// request more than the FIFO can take, stop after FRAME_WORDS and start over at the
// new base after frame_start.
module tb_ddr_read_ctrl;
  import tracker_pkg::*;
  localparam int FW = 96, B = 8, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic frame_start = 0, gnt = 0, done = 0, req;
  logic [AW-1:0] frame_base = 0;
  logic [6:0] fifo_count = 0;
  mem_req_t req_info;
  int checks = 0, failures = 0;

  ddr_read_ctrl #(.FRAME_WORDS(FW), .BURST(B), .FIFO_DEPTH(D), .CNTW(7)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_frame(input logic [AW-1:0] base);
    int expect_addr;
    expect_addr = base;
    @(negedge clk); frame_base = base; frame_start = 1;
    @(negedge clk); frame_start = 0;
    for (int c = 0; c < 1500; c++) begin
      @(negedge clk);
      if (c % 3 == 0 && fifo_count > 0) fifo_count--;
      if (req) begin
        checks++;
        if (req_info.write || req_info.len != B || req_info.addr != AW'(expect_addr) || fifo_count + B > D) begin
          failures++; $display("req addr %0d exp %0d fill %0d", req_info.addr, expect_addr, fifo_count);
        end
        gnt = 1; @(negedge clk); gnt = 0;
        repeat (4) @(negedge clk);
        fifo_count += B;
        done = 1; @(negedge clk); done = 0;
        expect_addr += B;
      end
    end
    checks++;
    if (expect_addr != int'(base) + FW) begin failures++; $display("frame read up to %0d", expect_addr); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run_frame(24'h2000);
    run_frame(24'h9000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
