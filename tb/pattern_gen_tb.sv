// pattern_gen_tb: checks the four data patterns.
`timescale 1ns/1ps
module pattern_gen_tb;
  logic [1:0] sel;
  logic [71:0] wdata;
  int checks = 0, failures = 0;

  pattern_gen #(.DW(72)) dut (.sel(sel), .wdata(wdata));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s %h", what, wdata); end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sel = 0; #1 check(wdata == 72'h0, "all zeros");
    sel = 1; #1 check(wdata == {72{1'b1}}, "all ones");
    sel = 2; #1 check(wdata == {18{4'h5}}, "0101");
    sel = 3; #1 check(wdata == {18{4'hA}}, "1010");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
