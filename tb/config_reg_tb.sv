// config_reg_tb: shifts random configurations in over SIN/SCK and checks
// the pattern select and PLL setting fields, and that a single upset copy is
// outvoted.
`timescale 1ns/1ps
module config_reg_tb;
  localparam int PW = 8;
  logic sck = 0, sin = 0;
  logic [1:0] sel;
  logic [PW-1:0] pll_cfg;
  int checks = 0, failures = 0;

  config_reg #(.PLL_CFG_W(PW)) dut (.sck(sck), .sin(sin), .sel(sel), .pll_cfg(pll_cfg));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic shift_word(input logic [PW+1:0] w);
    for (int i = PW + 1; i >= 0; i--) begin
      sin = w[i];
      #5 sck = 1;
      #5 sck = 0;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PW+1:0] w;
    for (int n = 0; n < 30; n++) begin
      w = (PW+2)'($urandom);
      shift_word(w);
      #1;
      check(sel == w[1:0], "sel field");
      check(pll_cfg == w[PW+1:2], "pll field");
    end
    dut.u_cfg.copy1 = ~dut.u_cfg.copy1;
    #1 check(sel == w[1:0] && pll_cfg == w[PW+1:2], "one upset copy outvoted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
