// sram_macro_tb: writes the pattern into all words, scans them, flips bits
// in the storage and checks that the macro reports exactly those bits two
// cycles after the failing word is addressed, for two patterns.
`timescale 1ns/1ps
module sram_macro_tb;
  localparam int DW = 72, WORDS = 128;
  logic clk = 0, rst = 1;
  logic [1:0] sel;
  logic [6:0] addr;
  logic we, rd_chk, chk_en, clr, error;
  logic [DW-1:0] err_data;
  int checks = 0, failures = 0;

  sram_macro #(.DW(DW), .WORDS(WORDS)) dut (.clk(clk), .rst(rst), .sel(sel), .addr(addr), .we(we),
    .rd_chk(rd_chk), .chk_en(chk_en), .clr(clr), .error(error), .err_data(err_data));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s err=%b data=%h", what, error, err_data); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] mask;
    int fa;
    we = 0; rd_chk = 0; chk_en = 0; clr = 0; addr = 0;
    for (int p = 0; p < 2; p++) begin
      sel = (p == 0) ? 2'd1 : 2'd2;
      rst = 1; #12 rst = 0;
      // initialise all words
      for (int a = 0; a < WORDS; a++) begin
        @(negedge clk) we = 1; addr = 7'(a);
      end
      @(negedge clk) we = 0;
      // inject flips into one word
      fa = $urandom % WORDS;
      mask = '0;
      mask[$urandom % DW] = 1'b1;
      mask[$urandom % DW] = 1'b1;
      dut.u_sram.mem[fa] = dut.u_sram.mem[fa] ^ mask;
      // scan: address a is set before clock edge a; the word is read at
      // edge a and its check result is latched at edge a+1.
      chk_en = 1;
      for (int a = 0; a <= WORDS; a++) begin
        addr = 7'(a % WORDS); rd_chk = (a < WORDS);
        @(negedge clk);
        if (a >= 1 && a - 1 == fa) begin
          check(error == 1'b1, "error flagged two edges after its address");
          check(err_data == mask, "error vector");
          chk_en = 0;
        end else if (a >= 1 && a - 1 < fa) begin
          check(error == 1'b0, "no false error");
        end
      end
      check(error == 1'b1 && err_data == mask, "held until clear");
      rd_chk = 0;
      clr = 1; @(negedge clk) clr = 0;
      check(error == 1'b0, "cleared");
      // overwrite the failing word with the pattern, rescan it
      addr = 7'(fa); we = 1; @(negedge clk) we = 0;
      rd_chk = 1; chk_en = 1; @(negedge clk) rd_chk = 0; @(negedge clk);
      check(error == 1'b0, "overwritten word reads back clean");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
