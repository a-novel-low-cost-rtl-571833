// tb_ddr_write_ctrl: a modelled FIFO level rises by one word per cycle; each
// granted burst removes BURST words after a delay. The requests must be write bursts
// of BURST words at frame_base, frame_base+BURST, ..., stop after FRAME_WORDS and
// restart at the new base after a second frame_start.
module tb_ddr_write_ctrl;
  import tracker_pkg::*;
  localparam int FW = 64, B = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic frame_start = 0, gnt = 0, done = 0, req;
  logic [AW-1:0] frame_base = 0;
  logic [8:0] fifo_count = 0;
  mem_req_t req_info;
  int checks = 0, failures = 0, nreq = 0;

  ddr_write_ctrl #(.FRAME_WORDS(FW), .BURST(B), .CNTW(9)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_frame(input logic [AW-1:0] base, input int words);
    int expect_addr, produced;
    expect_addr = base; produced = 0;
    @(negedge clk); frame_base = base; frame_start = 1;
    @(negedge clk); frame_start = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      if (produced < words) begin fifo_count++; produced++; end
      if (req && $urandom_range(0, 2) == 0) begin
        checks++;
        if (!req_info.write || req_info.len != B || req_info.addr != AW'(expect_addr)) begin
          failures++; $display("req addr %0d exp %0d", req_info.addr, expect_addr);
        end
        if (fifo_count < B) begin failures++; $display("request without a full burst"); end
        gnt = 1; @(negedge clk); gnt = 0;
        repeat (B) @(negedge clk);
        fifo_count -= B;
        done = 1; @(negedge clk); done = 0;
        expect_addr += B; nreq++;
      end
    end
    checks++;
    if (expect_addr != int'(base) + FW) begin failures++; $display("frame wrote up to %0d", expect_addr); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run_frame(24'h1000, FW + 16);   // extra words beyond the frame must not be written
    fifo_count = 0;
    run_frame(24'h8000, FW);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
