// ecc_enc: protects the 120-bit error record before it enters the FIFO.
//
// The record is cut into 8 groups of 15 bits (group g = data[15g+14:15g]).
// Each group becomes a 20-bit Hamming codeword code[20g+19:20g]: codeword
// position p = 1..20 is stored in bit p-1; positions 1, 2, 4, 8 and 16 hold
// check bits, the other 15 positions hold the data bits in ascending order.
// Check bit 2^k is the XOR of all data positions whose index has bit k set,
// so a reader recomputes the 5-bit syndrome and, if non-zero, flips the
// position it names (single-error correction per group). Combinational.
// The code is systematic: 120 of the 160 outputs are record bits passed
// straight through, only the 40 check bits are logic.
// The 120 and 160 widths are the chip's; the code itself is this design's
// choice, the one that fills 160 bits exactly.
module ecc_enc
  import sscan_pkg::*;
#(
  parameter int unsigned K      = ECC_K,
  parameter int unsigned N      = ECC_N,
  parameter int unsigned GROUPS = ECC_GROUPS
) (
  input  logic [K*GROUPS-1:0] data,
  output logic [N*GROUPS-1:0] code
);

  always_comb begin
    code = '0;
    for (int g = 0; g < GROUPS; g++) begin
      int d;
      d = 0;
      // data bits into the non-power-of-two positions
      for (int p = 1; p <= N; p++) begin
        if ((p & (p - 1)) != 0) begin
          code[g*N + p - 1] = data[g*K + d];
          d++;
        end
      end
      // check bits
      for (int k = 0; (1 << k) <= N; k++) begin
        logic par;
        par = 1'b0;
        for (int p = 1; p <= N; p++) begin
          if (((p & (p - 1)) != 0) && ((p >> k) & 1) == 1)
            par = par ^ code[g*N + p - 1];
        end
        code[g*N + (1 << k) - 1] = par;
      end
    end
  end

endmodule
