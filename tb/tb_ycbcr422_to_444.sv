// tb_ycbcr422_to_444: drives lines of 4:2:2 pixels (Cb on even, Cr on odd pixels,
// random values, with gaps between lines) and checks every output pixel against
// the pair's Y, Cb and Cr, the flags, and the fixed two-cycle latency.
module tb_ycbcr422_to_444;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [7:0] in_y = 0, in_c = 0;
  logic out_valid, out_sof, out_eol;
  logic [7:0] out_y, out_cb, out_cr;
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { logic [7:0] y, cb, cr; logic sof, eol; int t; } px_t;
  px_t exp_q [$];

  ycbcr422_to_444 dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    px_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_y !== e.y || out_cb !== e.cb || out_cr !== e.cr || out_sof !== e.sof ||
          out_eol !== e.eol || cyc - e.t != 2) begin
        failures++;
        $display("mismatch y=%h/%h cb=%h/%h cr=%h/%h lat=%0d", out_y, e.y, out_cb, e.cb, out_cr, e.cr, cyc - e.t);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ln = 0; ln < 6; ln++) begin
      for (int p = 0; p < 16; p += 2) begin
        logic [7:0] y0, y1, cb, cr;
        y0 = $urandom; y1 = $urandom; cb = $urandom; cr = $urandom;
        @(negedge clk);
        in_valid = 1; in_sof = (ln == 0 && p == 0); in_eol = 0; in_y = y0; in_c = cb;
        exp_q.push_back('{y0, cb, cr, (ln == 0 && p == 0), 1'b0, cyc});
        @(negedge clk);
        in_sof = 0; in_eol = (p == 14); in_y = y1; in_c = cr;
        exp_q.push_back('{y1, cb, cr, 1'b0, (p == 14), cyc});
      end
      @(negedge clk); in_valid = 0; in_eol = 0;
      repeat (ln) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d pixels missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
