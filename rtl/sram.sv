// sram: one-port DW-bit x WORDS-word SRAM.
//
// One access per rising clock: when we is high the word at addr is written,
// otherwise it is read. rdata is registered, so read data appears in the
// cycle after the address, as in the chip's timing chart. A write also
// returns the written word on rdata (write-first). The storage has no reset,
// like a real SRAM; the scan FSM initialises it.
// The chip uses a 55-nm SRAM macro here; this is its behaviour written as a
// register array so it can be simulated and synthesised anywhere.
module sram #(
  parameter int unsigned DW    = 72,
  parameter int unsigned WORDS = 128,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) begin
      mem[addr] <= wdata;
      rdata     <= wdata;
    end else begin
      rdata     <= mem[addr];
    end
  end

endmodule
