// addr_gen_tb: random command stream against a reference model of the
// address counter (increment with wrap, hold, step back 4, restart at 0).
`timescale 1ns/1ps
module addr_gen_tb;
  import sscan_pkg::*;
  logic clk = 0, rst = 1;
  ag_cmd_e cmd;
  logic [6:0] addr;
  int model;
  int checks = 0, failures = 0;

  addr_gen dut (.clk(clk), .rst(rst), .cmd(cmd), .addr(addr));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s addr=%0d model=%0d", what, addr, model); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = AG_INC;
    #12 check(addr == 0, "reset");
    rst = 0; model = 0;
    // a full scan pass visits 128 words and returns to 0
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
    end
    check(addr == 0, "128 increments wrap to 0");
    for (int i = 0; i < 2000; i++) begin
      case ($urandom % 8)
        0: cmd = AG_HOLD;
        1: cmd = AG_BACK;
        2: cmd = AG_ZERO;
        default: cmd = AG_INC;
      endcase
      @(posedge clk);
      case (cmd)
        AG_INC:  model = (model + 1) % 128;
        AG_HOLD: model = model;
        AG_BACK: model = (model + 128 - 4) % 128;
        default: model = 0;
      endcase
      #1 check(addr == 7'(model), "command");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
