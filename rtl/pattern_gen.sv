// pattern_gen: data pattern generator of one SRAM macro.
//
// Combinational: turns the 2-bit pattern select from the configuration
// register into the DW-bit word that is written into every address and
// that every read is compared against.
//   sel = 0  all zeros (the setting used for irradiation)
//   sel = 1  all ones
//   sel = 2  ...0101 (bit 0 = 1)
//   sel = 3  ...1010
// The chip's generator is only named; this set of patterns is this
// design's choice. The word does not depend on the address.
module pattern_gen #(
  parameter int unsigned DW = 72
) (
  input  logic [1:0]    sel,
  output logic [DW-1:0] wdata
);

  always_comb begin
    for (int i = 0; i < DW; i++) begin
      unique case (sel)
        2'd0: wdata[i] = 1'b0;
        2'd1: wdata[i] = 1'b1;
        2'd2: wdata[i] = (i % 2 == 0);
        default: wdata[i] = (i % 2 == 1);
      endcase
    end
  end

endmodule
