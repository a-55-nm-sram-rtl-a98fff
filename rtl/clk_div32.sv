// clk_div32: divides the PLL clock CK by 32 for the PLLOUT pin.
//
// A 5-bit counter (log2 DIV bits) cleared by RESET; PLLOUT is its MSB, a
// square wave with 50% duty cycle at f(CK)/DIV. Off chip, an FPGA counts
// PLLOUT edges against the reference clock to recover the actual CK
// frequency. The divide ratio 32 is the chip's; the counter is this
// design's implementation of it.
module clk_div32 #(
  parameter int unsigned DIV = 32
) (
  input  logic clk,
  input  logic rst,
  output logic pllout
);

  localparam int unsigned CW = $clog2(DIV);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) cnt <= '0;
    else     cnt <= cnt + CW'(1);
  end

  assign pllout = cnt[CW-1];

endmodule
