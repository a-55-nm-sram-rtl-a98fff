// async_fifo_tb: unrelated write (10 ns) and read (37 ns) clocks. Random
// writes and reads are checked for order and content; then the FIFO is
// filled with the reader stopped, further writes must be dropped, and
// exactly DEPTH words must come out.
`timescale 1ns/1ps
module async_fifo_tb;
  localparam int W = 160, DEPTH = 64;
  logic wclk = 0, rclk = 0, rst = 1;
  logic we = 0, re = 0, full, empty;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;
  bit reading = 1, writing = 1;
  int nread = 0;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (.rst(rst), .wclk(wclk), .we(we), .wdata(wdata),
    .full(full), .rclk(rclk), .re(re), .rdata(rdata), .empty(empty));

  always #5 wclk = ~wclk;
  always #18.5 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  always @(negedge wclk) begin
    we <= 0;
    if (!rst && writing && ($urandom % 3 == 0)) begin
      logic [W-1:0] v;
      v = {$urandom, $urandom, $urandom, $urandom, $urandom};
      we <= 1; wdata <= v;
    end
  end
  always @(posedge wclk) if (we && !full) q.push_back(wdata);

  // reader
  always @(negedge rclk) begin
    re <= 0;
    if (!rst && reading && !empty) begin
      check(q.size() > 0, "word available");
      if (q.size() > 0) check(rdata == q[0], "order and data");
      re <= 1;
    end
  end
  always @(posedge rclk) if (re && !empty) begin void'(q.pop_front()); nread++; end

  initial begin
    int nbefore;
    #40 rst = 0;
    #200000;
    // stop reading, fill up
    reading = 0;
    #20000;
    check(full, "full after filling");
    check(q.size() == DEPTH, "exactly DEPTH words accepted");
    writing = 0;
    #100;
    nbefore = nread;
    reading = 1;
    #20000;
    check(nread - nbefore == DEPTH, "DEPTH words drained");
    check(empty, "empty after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
