// clk_div32_tb: measures PLLOUT period and high time in CK cycles.
`timescale 1ns/1ps
module clk_div32_tb;
  logic clk = 0, rst = 1, pllout;
  int checks = 0, failures = 0;

  clk_div32 dut (.clk(clk), .rst(rst), .pllout(pllout));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hi, lo;
    #12 rst = 0;
    @(posedge pllout);
    for (int p = 0; p < 10; p++) begin
      hi = 0; lo = 0;
      while (pllout) begin @(posedge clk); hi++; #1; end
      while (!pllout) begin @(posedge clk); lo++; #1; end
      check(hi + lo == 32, "period 32 CK cycles");
      check(hi == 16, "50% duty");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
