// sscan_host_pkg: what a host needs to read the scanner's records.
//
// ecc_decode() undoes the FIFO protection: each of the 8 groups of 20 code
// bits is a Hamming codeword (position p in bit p-1, check bits at positions
// 1, 2, 4, 8, 16). The syndrome is the XOR of the positions of all 1 bits;
// a non-zero syndrome names the single flipped position, which is corrected.
// The 15 data bits are then taken from the non-power-of-two positions in
// ascending order. unpack() splits the 120-bit record and undoes the
// pipeline offsets (address - 4, timestamp - 2).
package sscan_host_pkg;

  typedef struct {
    int unsigned    macro;
    int unsigned    addr;      // failing word
    longint unsigned ts;       // cycle in which ERROR was first high (mod 2^35)
    logic [71:0]    err_data;
  } host_rec_t;

  function automatic logic [119:0] ecc_decode(input logic [159:0] code, output int corrected);
    logic [119:0] data;
    corrected = 0;
    data = '0;
    for (int g = 0; g < 8; g++) begin
      logic [19:0] cw;
      int syn, d;
      cw = code[g*20 +: 20];
      syn = 0;
      for (int p = 1; p <= 20; p++) if (cw[p-1]) syn = syn ^ p;
      if (syn != 0 && syn <= 20) begin
        cw[syn-1] = ~cw[syn-1];
        corrected++;
      end
      d = 0;
      for (int p = 1; p <= 20; p++) begin
        if ((p & (p - 1)) != 0) begin
          data[g*15 + d] = cw[p-1];
          d++;
        end
      end
    end
    return data;
  endfunction

  function automatic host_rec_t unpack(input logic [119:0] rec);
    host_rec_t r;
    r.err_data = rec[71:0];
    r.macro    = rec[77:72];
    r.addr     = (int'(rec[84:78]) + 128 - 4) % 128;
    r.ts       = longint'(rec[119:85]) - 2;
    return r;
  endfunction

endpackage
