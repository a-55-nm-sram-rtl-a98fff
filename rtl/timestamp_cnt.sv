// timestamp_cnt: free-running cycle counter used as the error timestamp.
//
// A triplicated TS_W-bit (36 in the chip) counter that RESET clears and that
// counts every CK cycle, wrapping at 2^TS_W. Since the detectors are reset by
// the same RESET, a timestamp times the CK period gives the time since reset.
module timestamp_cnt #(
  parameter int unsigned TS_W = 36
) (
  input  logic            clk,
  input  logic            rst,
  output logic [TS_W-1:0] ts
);

  tmr_reg #(.W(TS_W)) u_cnt (
    .clk     (clk),
    .rst     (rst),
    .rst_val ('0),
    .d       (ts + TS_W'(1)),
    .q       (ts)
  );

endmodule
