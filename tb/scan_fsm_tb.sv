// scan_fsm_tb: the FSM with the address generator, fed by a model of the
// macros' error flags and of the priority encoder's registered "more" flag.
// Checks the init pass, the scan, and the error sequence cycle by cycle for
// one failing macro (the chip's timing chart) and for three macros failing
// at the same word.
`timescale 1ns/1ps
module scan_fsm_tb;
  import sscan_pkg::*;
  logic clk = 0, rst = 1;
  logic err_all, more;
  logic [6:0] addr;
  ag_cmd_e ag_cmd;
  logic sram_we, rd_chk, chk_en, cap_all, cap_pe, fifo_we, clr;
  state_e state;
  int nflags = 0;      // macros with ERROR latched
  logic more_q = 0;    // encoder register
  int checks = 0, failures = 0;

  addr_gen u_ag (.clk(clk), .rst(rst), .cmd(ag_cmd), .addr(addr));
  scan_fsm dut (.clk(clk), .rst(rst), .err_all(err_all), .more(more), .addr(addr), .ag_cmd(ag_cmd),
    .sram_we(sram_we), .rd_chk(rd_chk), .chk_en(chk_en), .cap_all(cap_all), .cap_pe(cap_pe),
    .fifo_we(fifo_we), .clr(clr), .state(state));

  assign err_all = (nflags > 0);
  assign more    = more_q;

  always #5 clk = ~clk;

  always @(posedge clk) begin
    more_q <= (nflags > 1);
    if (clr && nflags > 0) nflags <= nflags - 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s (state=%s addr=%0d)", $time, what, state.name(), addr); end
  endtask

  // expected control outputs of one cycle
  task automatic expect_cyc(input int a, input bit we_e, input bit chk_e, input bit capa, input bit capp,
                            input bit fwe, input string what);
    check(addr == 7'(a % 128), {what, ": ADD"});
    check(sram_we == we_e, {what, ": SRAM_WE"});
    check(rd_chk == chk_e, {what, ": read checked"});
    check(cap_all == capa && cap_pe == capp, {what, ": capture"});
    check(fifo_we == fwe && clr == fwe, {what, ": FIFO_WE/clear"});
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, n_fifo;
    #12 rst = 0;
    // init pass: every word written once
    for (int a = 0; a < 128; a++) begin
      #1 expect_cyc(a, 1, 0, 0, 0, 0, "init");
      @(negedge clk);
    end
    // two scan passes, each word once per 128 cycles
    for (int a = 0; a < 256; a++) begin
      expect_cyc(a, 0, 1, 0, 0, 0, "scan");
      check(chk_en == 1, "scan: checker enabled");
      @(negedge clk);
    end
    for (int n = 1; n <= 3; n += 2) begin
      // word e failed; its ERROR flags rise at the clock edge when ADD = e+2
      e = addr;
      @(negedge clk); @(negedge clk);        // ADD = e+2 now
      nflags = n;                            // as if latched at this cycle's edge
      #1 expect_cyc(e + 2, 0, 0, 0, 0, 0, "ERROR cycle");
      check(chk_en == 0, "checker frozen while ERR_ALL");
      @(negedge clk) expect_cyc(e + 3, 0, 0, 0, 0, 0, "error wait");
      @(negedge clk) expect_cyc(e + 4, 0, 0, 1, 0, 0, "capture at ADD = e+4");
      @(negedge clk) expect_cyc(e,     1, 0, 0, 0, 0, "overwrite failing word");
      n_fifo = 1;
      @(negedge clk) expect_cyc(e + 1, 0, (n == 1), 0, 0, 1, "FIFO write");
      while (n_fifo < n) begin
        @(negedge clk) expect_cyc(e + 1, 0, 0, 0, 0, 0, "next macro wait");
        @(negedge clk) expect_cyc(e + 1, 0, 0, 0, 1, 0, "next macro capture");
        n_fifo++;
        @(negedge clk) expect_cyc(e + 1, 0, (n_fifo == n), 0, 0, 1, "FIFO write (next macro)");
      end
      @(negedge clk) expect_cyc(e + 2, 0, 1, 0, 0, 0, "scan resumes");
      check(nflags == 0, "all macros cleared");
      for (int k = 0; k < 200; k++) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
