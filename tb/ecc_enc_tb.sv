// ecc_enc_tb: encodes random records; checks that every group decodes with
// a zero syndrome to the original data, and that any single flipped bit in
// a group is corrected by the host decoder.
`timescale 1ns/1ps
module ecc_enc_tb;
  import sscan_host_pkg::*;
  logic [119:0] data;
  logic [159:0] code;
  int checks = 0, failures = 0;

  ecc_enc dut (.data(data), .code(code));

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
    logic [159:0] bad;
    int corr, pos;
    for (int i = 0; i < 300; i++) begin
      data = {$urandom, $urandom, $urandom, $urandom};
      if (i == 0) data = '0;
      if (i == 1) data = '1;
      #1;
      check(ecc_decode(code, corr) == data && corr == 0, "clean codeword");
      bad = code;
      pos = $urandom % 160;
      bad[pos] = ~bad[pos];
      check(ecc_decode(bad, corr) == data && corr == 1, "single flip corrected");
      // one flip in each of the eight groups
      bad = code;
      for (int g = 0; g < 8; g++) begin
        pos = g*20 + $urandom % 20;
        bad[pos] = ~bad[pos];
      end
      check(ecc_decode(bad, corr) == data && corr == 8, "one flip per group corrected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
