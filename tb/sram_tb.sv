// sram_tb: writes random words to all addresses, reads them back in random
// order and checks the one-cycle read latency and write-first read data.
`timescale 1ns/1ps
module sram_tb;
  localparam int DW = 72, WORDS = 128;
  logic clk = 0, we = 0;
  logic [6:0] addr = 0;
  logic [DW-1:0] wdata = 0, rdata;
  logic [DW-1:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  sram #(.DW(DW), .WORDS(WORDS)) dut (.clk(clk), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [DW-1:0] rnd();
    return {$urandom, $urandom, $urandom};
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1; addr = 7'(a); wdata = rnd(); ref_mem[a] = wdata;
      @(negedge clk);
      check(rdata == ref_mem[a], "write-first data");
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 300; i++) begin
      int a;
      a = $urandom % WORDS;
      addr = 7'(a);
      @(negedge clk);
      check(rdata == ref_mem[a], "read one cycle after address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
