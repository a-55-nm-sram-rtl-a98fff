// async_fifo: dual-clock FIFO between the scan logic and the SPI port.
//
// DEPTH words of W bits (DEPTH a power of two). The write side runs on CK:
// when we is high and the FIFO is not full, wdata is stored; a write while
// full is dropped and the scan goes on. The read side runs on the SPI clock:
// rdata always shows the oldest word (first-word fall-through); a pulse on
// re pops it. Pointers are Gray-coded and cross to the other clock through
// two flip-flops, so full and empty are conservative. Because the read
// clock is the SPI clock, a word written while SCK is idle is seen as
// present only after two SPI clock edges. RESET clears both sides.
// The chip stores the ECC-protected record in an asynchronously read FIFO;
// depth, drop-on-full and the synchroniser scheme are this design's.
module async_fifo #(
  parameter int unsigned W     = 160,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned PW    = $clog2(DEPTH)
) (
  input  logic         rst,
  // write side
  input  logic         wclk,
  input  logic         we,
  input  logic [W-1:0] wdata,
  output logic         full,
  // read side
  input  logic         rclk,
  input  logic         re,
  output logic [W-1:0] rdata,
  output logic         empty
);

  logic [W-1:0] mem [DEPTH];

  logic [PW:0] wbin, wgray, rbin, rgray;
  logic [PW:0] rgray_w1, rgray_w2;   // read pointer in write domain
  logic [PW:0] wgray_r1, wgray_r2;   // write pointer in read domain

  function automatic logic [PW:0] bin2gray(logic [PW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write domain ----
  logic [PW:0] wbin_n;
  assign wbin_n = wbin + (PW+1)'(1);
  assign full   = (wgray == {~rgray_w2[PW:PW-1], rgray_w2[PW-2:0]});

  always_ff @(posedge wclk) begin
    if (we && !full) mem[wbin[PW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or posedge rst) begin
    if (rst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (we && !full) begin
        wbin  <= wbin_n;
        wgray <= bin2gray(wbin_n);
      end
    end
  end

  // ---- read domain ----
  logic [PW:0] rbin_n;
  assign rbin_n = rbin + (PW+1)'(1);
  assign empty  = (rgray == wgray_r2);
  assign rdata  = mem[rbin[PW-1:0]];

  always_ff @(posedge rclk or posedge rst) begin
    if (rst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (re && !empty) begin
        rbin  <= rbin_n;
        rgray <= bin2gray(rbin_n);
      end
    end
  end

  // Readers must only pop a word that is there.
  a_no_pop_when_empty: assert property (@(posedge rclk) disable iff (rst) re |-> !empty);

endmodule
