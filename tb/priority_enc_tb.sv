// priority_enc_tb: random sets of flagged macros; checks one cycle later that
// the lowest-numbered flagged macro and its error data are selected and that
// "more" tells whether others remain.
`timescale 1ns/1ps
module priority_enc_tb;
  localparam int R = 36, DW = 72, MW = 6;
  logic clk = 0, rst = 1;
  logic [R-1:0] error;
  logic [R-1:0][DW-1:0] err_data;
  logic [MW+DW-1:0] pe_out;
  logic more;
  int checks = 0, failures = 0;

  priority_enc #(.R(R), .DW(DW), .MW(MW)) dut (.clk(clk), .rst(rst), .error(error),
    .err_data(err_data), .pe_out(pe_out), .more(more));

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
    int win, n;
    logic [MW+DW-1:0] exp_out;
    error = 0; err_data = 0;
    #12 rst = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      error = '0;
      n = $urandom % 4;
      for (int k = 0; k < n; k++) error[$urandom % R] = 1'b1;
      for (int k = 0; k < R; k++) err_data[k] = {$urandom, $urandom, $urandom};
      win = -1; n = 0;
      for (int k = 0; k < R; k++) if (error[k]) begin n++; if (win < 0) win = k; end
      exp_out = (win < 0) ? '0 : {MW'(win), err_data[win]};
      @(negedge clk);
      check(pe_out == exp_out, "selected macro and data");
      check(more == (n > 1), "more");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
