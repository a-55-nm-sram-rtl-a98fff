// timestamp_cnt_tb: counts cycles since reset; checks the count, a reset in
// the middle, and that a single upset copy does not disturb the count.
`timescale 1ns/1ps
module timestamp_cnt_tb;
  logic clk = 0, rst = 1;
  logic [35:0] ts;
  int checks = 0, failures = 0;

  timestamp_cnt #(.TS_W(36)) dut (.clk(clk), .rst(rst), .ts(ts));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s ts=%0d", what, ts); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12 check(ts == 0, "reset");
    @(negedge clk) rst = 0;
    for (int n = 1; n <= 500; n++) begin
      @(negedge clk);
      check(ts == 36'(n), "count");
      if (n == 250) dut.u_cnt.copy2 = ~dut.u_cnt.copy2;
    end
    rst = 1; #1 check(ts == 0, "reset mid-run"); @(negedge clk) rst = 0;
    @(negedge clk) check(ts == 1, "restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
