// err_or: ERR_ALL generation.
//
// ERR_ALL is the OR of the ERROR outputs of all R macros, as in the chip.
// Combinational.
module err_or #(
  parameter int unsigned R = 36
) (
  input  logic [R-1:0] error,
  output logic         err_all
);

  assign err_all = |error;

endmodule
