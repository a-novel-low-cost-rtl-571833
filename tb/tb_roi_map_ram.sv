// tb_roi_map_ram: writes random words to random addresses while reading others,
// keeping a reference array; every read must return the reference one cycle later.
module tb_roi_map_ram;
  import tracker_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [DW-1:0] wdata = 0, rdata;
  logic [DW-1:0] ref_mem [64];
  int checks = 0, failures = 0;

  roi_map_ram #(.DEPTH(64)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); we = 1; waddr = a; wdata = {$urandom, $urandom, $urandom, $urandom}; ref_mem[a] = wdata;
    end
    for (int i = 0; i < 500; i++) begin
      logic [DW-1:0] expv;
      @(negedge clk);
      raddr = $urandom; expv = ref_mem[raddr];
      we = $urandom_range(0, 1); waddr = $urandom; wdata = {$urandom, $urandom, $urandom, $urandom};
      if (we && waddr != raddr) ref_mem[waddr] = wdata;
      else we = 0;
      @(negedge clk); we = 0;
      checks++; if (rdata !== expv) begin failures++; $display("addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
