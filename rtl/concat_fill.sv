// concat_fill: assembles the error record written to the FIFO.
//
// On cap_all the register loads {timestamp[TS_FIELD_W-1:0], ADD, macro,
// error data} (record_t, 35+7+6+72 = 120 bits); on cap_pe only the
// {macro, error data} part is replaced, for a further macro that failed at
// the same word. The output holds until the next capture.
// The chip's block diagram gives inputs of 36, 78 and 7 bits and a 120-bit
// output, one bit short of all three; this design keeps the 120-bit record
// and drops the timestamp MSB (the 35 bits wrap after 2^35 cycles, over 33 s
// at 1 GHz, far longer than the host's read interval). The field order is
// this design's choice.
module concat_fill
  import sscan_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              cap_all,
  input  logic              cap_pe,
  input  logic [TS_W-1:0]   ts,
  input  logic [ADDR_W-1:0] addr,
  input  logic [PE_W-1:0]   pe_out,   // {macro, err_data}
  output record_t           payload
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      payload <= '0;
    end else if (cap_all) begin
      payload.ts       <= ts[TS_FIELD_W-1:0];
      payload.addr     <= addr;
      payload.macro    <= pe_out[PE_W-1:DATA_W];
      payload.err_data <= pe_out[DATA_W-1:0];
    end else if (cap_pe) begin
      payload.macro    <= pe_out[PE_W-1:DATA_W];
      payload.err_data <= pe_out[DATA_W-1:0];
    end
  end

endmodule
