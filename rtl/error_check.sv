// error_check: read-data checker of one SRAM macro.
//
// The read issued in a cycle with rd_chk high is compared, in the next cycle,
// with the expected word: the XOR has a 1 at every flipped bit. If chk_en is
// high in that cycle the XOR is latched as err_data and error = |err_data.
// Once set, error and err_data hold until clr, so the FSM can log them; while
// the FSM is busy with an error it keeps chk_en low and nothing new is
// latched. Timing: address in cycle t, RDATA in t+1, ERROR in t+2.
// The XOR error vector and the registered ERROR follow the chip; the
// hold-until-clear and the rd_chk/chk_en qualifiers are this design's.
module error_check #(
  parameter int unsigned DW = 72
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] rdata,
  input  logic [DW-1:0] expected,
  input  logic          rd_chk,
  input  logic          chk_en,
  input  logic          clr,
  output logic          error,
  output logic [DW-1:0] err_data
);

  logic          chk_q;     // rdata of this cycle comes from a scan read
  logic [DW-1:0] diff;

  assign diff = rdata ^ expected;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      chk_q    <= 1'b0;
      error    <= 1'b0;
      err_data <= '0;
    end else begin
      chk_q <= rd_chk;
      if (clr) begin
        error    <= 1'b0;
        err_data <= '0;
      end else if (chk_en && chk_q) begin
        error    <= |diff;
        err_data <= diff;
      end
    end
  end

endmodule
