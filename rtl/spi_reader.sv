// spi_reader: SPI read-out of the error FIFO.
//
// One frame = spi_cs_n low for W+1 rising edges of spi_sck. The host samples
// spi_sdo at each rising edge; the reader changes it just after the edge.
//   edge 0      host reads the valid bit (1 = a record follows). On this
//               edge the reader copies the FIFO head into its shift register
//               and pops it if the FIFO is not empty.
//   edges 1..W  host reads the record, bit W-1 first; on a frame with valid
//               = 0 these bits are zero.
// Raising spi_cs_n ends the frame and rewinds the bit counter (asynchronously);
// a frame cut short after edge 0 loses that record. RESET clears the reader.
// The chip reads its FIFO over SPI; this frame format is this design's.
module spi_reader #(
  parameter int unsigned W = 160
) (
  input  logic         rst,
  input  logic         spi_sck,
  input  logic         spi_cs_n,
  output logic         spi_sdo,
  // FIFO read side
  input  logic         empty,
  input  logic [W-1:0] rdata,
  output logic         re
);

  localparam int unsigned CW = $clog2(W + 2);

  logic [CW-1:0] bitcnt;
  logic [W-1:0]  shreg;
  logic          first;

  assign first = (bitcnt == '0);
  assign re    = !spi_cs_n && first && !empty;

  // End of frame and RESET both rewind the bit counter.
  logic frame_rst;
  assign frame_rst = rst | spi_cs_n;

  always_ff @(posedge spi_sck or posedge frame_rst) begin
    if (frame_rst) begin
      bitcnt <= '0;
    end else if (bitcnt != CW'(W + 1)) begin
      bitcnt <= bitcnt + CW'(1);
    end
  end

  always_ff @(posedge spi_sck or posedge rst) begin
    if (rst) begin
      shreg <= '0;
    end else if (first) begin
      shreg <= empty ? '0 : rdata;
    end else begin
      shreg <= {shreg[W-2:0], 1'b0};
    end
  end

  assign spi_sdo = first ? !empty : shreg[W-1];

endmodule
