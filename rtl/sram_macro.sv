// sram_macro: one of the chip's SRAM macros.
//
// Pattern generator, one-port DW x WORDS SRAM and error checker. The pattern
// word is both the write data (used when we is high: initialisation and the
// overwrite of a failing word) and the expected value of every read. A
// failing read latches ERROR and the error vector two cycles after its
// address (see error_check) until clr.
// The composition is the chip's; the control inputs rd_chk, chk_en and clr
// are this design's way of letting the FSM qualify and clear the checker.
module sram_macro #(
  parameter int unsigned DW    = 72,
  parameter int unsigned WORDS = 128,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [1:0]    sel,
  input  logic [AW-1:0] addr,
  input  logic          we,
  input  logic          rd_chk,
  input  logic          chk_en,
  input  logic          clr,
  output logic          error,
  output logic [DW-1:0] err_data
);

  logic [DW-1:0] wdata, rdata;

  pattern_gen #(.DW(DW)) u_pat (
    .sel   (sel),
    .wdata (wdata)
  );

  sram #(.DW(DW), .WORDS(WORDS), .AW(AW)) u_sram (
    .clk   (clk),
    .we    (we),
    .addr  (addr),
    .wdata (wdata),
    .rdata (rdata)
  );

  error_check #(.DW(DW)) u_chk (
    .clk      (clk),
    .rst      (rst),
    .rdata    (rdata),
    .expected (wdata),
    .rd_chk   (rd_chk),
    .chk_en   (chk_en),
    .clr      (clr),
    .error    (error),
    .err_data (err_data)
  );

endmodule
