// tb_sync_fifo: random pushes and pops on a 16-deep FIFO, never writing when full or
// reading when empty, compared word by word with a queue; count, full and empty
// are checked every cycle, and the FIFO is filled to full once.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic empty, full;
  logic [4:0] count;
  int checks = 0, failures = 0, saw_full = 0;
  logic [15:0] q [$];

  sync_fifo #(.WIDTH(16), .DEPTH(16)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int bias;
      bias = (i % 600 < 300) ? 3 : 1;   // phases that fill and phases that drain
      @(negedge clk);
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == 16) ||
          (q.size() != 0 && rd_data != q[0])) begin
        failures++; $display("count %0d/%0d data %h", count, q.size(), rd_data);
      end
      if (full) saw_full++;
      wr_en = !full && ($urandom_range(0, 3) < bias);
      rd_en = !empty && ($urandom_range(0, 3) < 4 - bias);
      wr_data = $urandom;
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    checks++; if (saw_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
