// tmr_reg_tb: checks the triplicated register.
// Loads random values, checks reset, then flips one copy at a time and checks
// that the voted output is unchanged and that the copy is repaired by the
// next clock.
`timescale 1ns/1ps
module tmr_reg_tb;
  localparam int W = 8;
  logic clk = 0, rst = 1;
  logic [W-1:0] d, q, rst_val;
  int checks = 0, failures = 0;

  tmr_reg #(.W(W)) dut (.clk(clk), .rst(rst), .rst_val(rst_val), .d(d), .q(q));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v, m;
    rst_val = 8'hA5; d = 0;
    #12 check(q == 8'hA5, "reset value");
    rst = 0;
    for (int i = 0; i < 20; i++) begin
      v = W'($urandom);
      @(negedge clk) d = v;
      @(negedge clk) check(q == v, "load");
      // single-copy upset
      m = W'(1 << (i % W));
      case (i % 3)
        0: dut.copy0 = dut.copy0 ^ m;
        1: dut.copy1 = dut.copy1 ^ m;
        default: dut.copy2 = dut.copy2 ^ m;
      endcase
      #1 check(q == v, "vote masks one upset copy");
      @(negedge clk);
      check(dut.copy0 == v && dut.copy1 == v && dut.copy2 == v, "copy scrubbed on next clock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
