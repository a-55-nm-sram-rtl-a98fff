// err_or_tb: ERR_ALL for zero, every single macro and random vectors.
`timescale 1ns/1ps
module err_or_tb;
  localparam int R = 36;
  logic [R-1:0] error;
  logic err_all;
  int checks = 0, failures = 0;

  err_or #(.R(R)) dut (.error(error), .err_all(err_all));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s %h", what, error); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    error = '0; #1 check(err_all == 0, "none");
    for (int i = 0; i < R; i++) begin
      error = '0; error[i] = 1'b1; #1 check(err_all == 1, "single");
    end
    for (int i = 0; i < 100; i++) begin
      error = R'({$urandom, $urandom}) & R'({$urandom, $urandom});
      #1 check(err_all == (error != 0), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
