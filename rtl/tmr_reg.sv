// tmr_reg: triple-modular-redundant register.
//
// Three copies of a W-bit register hold the same value. The output is the
// bitwise 2-of-3 majority of the copies. Every copy is loaded from the same
// next value d on each rising clock, so a bit flipped in one copy is outvoted
// at once and overwritten on the next clock (d is normally computed from q).
// Asynchronous active-high reset loads rst_val into all copies; tying rst to
// 0 gives a register that RESET does not touch.
// The chip triplicates its control registers; the voting scheme itself is
// this design's choice. A synthesis flow merges the three identical copies
// unless told to keep them (a keep/dont-touch constraint on copy0..copy2);
// the RTL states the intent and simulates the voting.
module tmr_reg #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] rst_val,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] copy0, copy1, copy2;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      copy0 <= rst_val;
      copy1 <= rst_val;
      copy2 <= rst_val;
    end else begin
      copy0 <= d;
      copy1 <= d;
      copy2 <= d;
    end
  end

  assign q = (copy0 & copy1) | (copy0 & copy2) | (copy1 & copy2);

endmodule
