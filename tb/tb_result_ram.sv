// tb_result_ram: writes boxes to the four slots and reads them back in random order,
// with the registered-read latency of one cycle.
module tb_result_ram;
  import tracker_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [1:0] waddr = 0, raddr = 0;
  box_t wdata = '0, rdata;
  box_t ref_mem [4];
  int checks = 0, failures = 0;

  result_ram dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < 20; r++) begin
      for (int a = 0; a < 4; a++) begin
        @(negedge clk); we = 1; waddr = a; wdata = box_t'({$urandom, $urandom}); ref_mem[a] = wdata;
      end
      @(negedge clk); we = 0;
      for (int k = 0; k < 8; k++) begin
        @(negedge clk); raddr = $urandom;
        @(negedge clk);
        checks++; if (rdata !== ref_mem[raddr]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
