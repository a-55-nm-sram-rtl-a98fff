// priority_enc: picks which failing macro is logged next.
//
// Among the macros whose ERROR is high, the lowest-numbered one wins. Its
// number (MW bits) and its DW-bit error vector form the PE_W-bit output
// {macro, err_data} (6 + 72 = 78 bits in the chip). "more" is high when at
// least one other macro is also flagged, which makes the FSM log the same
// word again after the winner has been cleared. With no macro flagged the
// output is zero. The result is registered in a triplicated register, so it
// is valid one cycle after the flags.
// Lowest-number-first priority and the "more" flag are this design's
// choices; the chip only states that a priority encoder resolves
// simultaneous errors at one address.
module priority_enc #(
  parameter int unsigned R  = 36,
  parameter int unsigned DW = 72,
  parameter int unsigned MW = (R > 1) ? $clog2(R) : 1
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [R-1:0]          error,
  input  logic [R-1:0][DW-1:0]  err_data,
  output logic [MW+DW-1:0]      pe_out,
  output logic                  more
);

  logic [MW-1:0] idx;
  logic          found;
  logic [R-1:0]  others;

  always_comb begin
    idx   = '0;
    found = 1'b0;
    for (int i = R - 1; i >= 0; i--) begin
      if (error[i]) begin
        idx   = MW'(i);
        found = 1'b1;
      end
    end
  end

  // Flags that remain once the winner is removed.
  always_comb begin
    others = error;
    if (found) others[idx] = 1'b0;
  end

  logic [MW+DW:0] d, q;

  assign d = found ? {|others, idx, err_data[idx]} : '0;

  tmr_reg #(.W(MW + DW + 1)) u_out (
    .clk     (clk),
    .rst     (rst),
    .rst_val ('0),
    .d       (d),
    .q       (q)
  );

  assign more   = q[MW+DW];
  assign pe_out = q[MW+DW-1:0];

endmodule
