// error_check_tb: random read data, qualifiers and clears against a
// reference model; checks the two-cycle latency from read to ERROR, the
// XOR error vector and hold-until-clear.
`timescale 1ns/1ps
module error_check_tb;
  localparam int DW = 72;
  logic clk = 0, rst = 1;
  logic [DW-1:0] rdata, expected, err_data;
  logic rd_chk, chk_en, clr, error;
  logic m_chk, m_err;
  logic [DW-1:0] m_data;
  int checks = 0, failures = 0;

  error_check #(.DW(DW)) dut (.clk(clk), .rst(rst), .rdata(rdata), .expected(expected),
    .rd_chk(rd_chk), .chk_en(chk_en), .clr(clr), .error(error), .err_data(err_data));

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
    logic [DW-1:0] flips;
    rdata = 0; expected = 0; rd_chk = 0; chk_en = 0; clr = 0;
    m_chk = 0; m_err = 0; m_data = 0;
    #12 rst = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      expected = {$urandom, $urandom, $urandom};
      flips = '0;
      if ($urandom % 4 == 0) flips[$urandom % DW] = 1'b1;
      if ($urandom % 8 == 0) flips[$urandom % DW] = 1'b1;
      rdata  = expected ^ flips;
      rd_chk = ($urandom % 4 != 0);
      chk_en = ($urandom % 4 != 0);
      clr    = ($urandom % 6 == 0);
      @(posedge clk);
      // reference model of the register update
      if (clr) begin m_err = 0; m_data = 0; end
      else if (chk_en && m_chk) begin m_err = |flips; m_data = flips; end
      m_chk = rd_chk;
      #1;
      check(error == m_err, "ERROR");
      check(err_data == m_data, "error data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
