// spi_reader_tb: an SPI master reads frames from the reader, which is fed by
// a behavioural FIFO. Checks the valid bit, the record bits MSB first, one
// pop per frame, and a zero frame when the FIFO is empty.
`timescale 1ns/1ps
module spi_reader_tb;
  localparam int W = 160;
  logic rst = 0, sck = 0, cs_n = 1, sdo, re;
  logic empty;
  logic [W-1:0] rdata;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;

  assign empty = (q.size() == 0);
  assign rdata = empty ? '0 : q[0];

  spi_reader #(.W(W)) dut (.rst(rst), .spi_sck(sck), .spi_cs_n(cs_n), .spi_sdo(sdo),
    .empty(empty), .rdata(rdata), .re(re));

  always @(posedge sck) if (re) void'(q.pop_front());

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One frame: sample before each rising edge.
  task automatic frame(output logic valid, output logic [W-1:0] word);
    cs_n = 0;
    #10;
    for (int i = 0; i <= W; i++) begin
      if (i == 0) valid = sdo;
      else word[W - i] = sdo;
      #5 sck = 1;
      #5 sck = 0;
    end
    #5 cs_n = 1;
    #10;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic v;
    logic [W-1:0] w, exp_w;
    int n;
    #5 rst = 1;
    #15 rst = 0;
    frame(v, w);
    check(v == 0, "empty FIFO gives valid = 0");
    check(w == '0, "empty frame is zero");
    for (int k = 0; k < 20; k++) begin
      n = 1 + $urandom % 3;
      for (int j = 0; j < n; j++) q.push_back({$urandom, $urandom, $urandom, $urandom, $urandom});
      for (int j = 0; j < n; j++) begin
        exp_w = q[0];
        frame(v, w);
        check(v == 1, "valid");
        check(w == exp_w, "record MSB first");
      end
      check(q.size() == 0, "one pop per frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
