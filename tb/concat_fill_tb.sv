// concat_fill_tb: checks the record layout on a full capture, that a
// partial capture replaces only macro and error data, and holding.
`timescale 1ns/1ps
module concat_fill_tb;
  import sscan_pkg::*;
  logic clk = 0, rst = 1, cap_all = 0, cap_pe = 0;
  logic [35:0] ts;
  logic [6:0] addr;
  logic [77:0] pe_out;
  record_t payload;
  logic [119:0] expect_v;
  int checks = 0, failures = 0;

  concat_fill dut (.clk(clk), .rst(rst), .cap_all(cap_all), .cap_pe(cap_pe), .ts(ts),
    .addr(addr), .pe_out(pe_out), .payload(payload));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s %h vs %h", what, payload, expect_v); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12 rst = 0;
    check(payload == '0, "reset");
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      ts = {$urandom, $urandom}; addr = 7'($urandom); pe_out = {$urandom, $urandom, $urandom};
      cap_all = 1; cap_pe = 0;
      @(negedge clk);
      expect_v = {ts[34:0], addr, pe_out};
      check(payload == expect_v, "full capture layout {ts[34:0], addr, macro, data}");
      cap_all = 0;
      ts = ~ts; addr = ~addr; pe_out = {$urandom, $urandom, $urandom};
      @(negedge clk);
      check(payload == expect_v, "hold");
      cap_pe = 1;
      @(negedge clk);
      cap_pe = 0;
      expect_v[77:0] = pe_out;
      check(payload == expect_v, "partial capture");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
