// sram_scan_chip: SRAM soft-error scanner, top level.
//
// R SRAM macros (36 x 72 bits x 128 words in the chip) share one address
// generator and are all read at the same address every cycle, so the whole
// array is checked every WORDS cycles (128 cycles = 125 ns at 1025 MHz).
// Each macro compares its read word with the configured pattern; the OR of
// the macros' ERROR outputs (ERR_ALL) starts the FSM's error sequence. A
// priority encoder picks one failing macro, the record {timestamp, address,
// macro number, error data} is captured, Hamming-protected from 120 to 160
// bits and written to a dual-clock FIFO, the failing word is rewritten with
// the expected value and the scan resumes. The host drains the FIFO over
// SPI (spi_* pins) at its own pace.
//
// Pins: ck is the PLL output clock (the PLL itself is not part of this RTL;
// pll_cfg carries its settings from the configuration register), reset is
// the asynchronous active-high RESET that clears everything except the
// configuration register, sck/sin load the configuration register, pllout
// is ck/32.
//
// Record timing: the address field is 4 words and the timestamp 2 cycles
// ahead of the event (failing word, first cycle ERROR was high); the reader
// subtracts these. The block structure, widths and single-error timing
// follow the chip; init pass, record layout, ECC code, FIFO depth and the
// SPI frame are this design's (see README).
module sram_scan_chip
  import sscan_pkg::*;
#(
  parameter int unsigned R          = N_MACRO,
  parameter int unsigned DW         = DATA_W,
  parameter int unsigned WORDS      = N_WORDS,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned PLL_CFG_W  = 8
) (
  input  logic                 ck,
  input  logic                 reset,
  // configuration register
  input  logic                 sck,
  input  logic                 sin,
  output logic [PLL_CFG_W-1:0] pll_cfg,
  // clock monitor
  output logic                 pllout,
  // FIFO read-out
  input  logic                 spi_sck,
  input  logic                 spi_cs_n,
  output logic                 spi_sdo
);

  localparam int unsigned AW = $clog2(WORDS);

  // The record layout is fixed by the package for the chip's sizes.
  if (DW != DATA_W || AW != ADDR_W || R > (1 << MACRO_W)) begin : g_size_check
    $error("sram_scan_chip: DW, WORDS and R must fit the record layout of sscan_pkg");
  end

  // ---------------- configuration and clock monitor ----------------
  logic [1:0] sel;

  config_reg #(.PLL_CFG_W(PLL_CFG_W)) u_cfg (
    .sck     (sck),
    .sin     (sin),
    .sel     (sel),
    .pll_cfg (pll_cfg)
  );

  clk_div32 u_div (
    .clk    (ck),
    .rst    (reset),
    .pllout (pllout)
  );

  // ---------------- scan control ----------------
  logic [AW-1:0] addr;
  ag_cmd_e       ag_cmd;
  logic          sram_we, rd_chk, chk_en, cap_all, cap_pe, fifo_we, clr;
  logic          err_all, more;
  state_e        state;

  addr_gen #(.AW(AW)) u_addr (
    .clk  (ck),
    .rst  (reset),
    .cmd  (ag_cmd),
    .addr (addr)
  );

  scan_fsm #(.WORDS(WORDS), .AW(AW)) u_fsm (
    .clk     (ck),
    .rst     (reset),
    .err_all (err_all),
    .more    (more),
    .addr    (addr),
    .ag_cmd  (ag_cmd),
    .sram_we (sram_we),
    .rd_chk  (rd_chk),
    .chk_en  (chk_en),
    .cap_all (cap_all),
    .cap_pe  (cap_pe),
    .fifo_we (fifo_we),
    .clr     (clr),
    .state   (state)
  );

  // ---------------- SRAM macros ----------------
  logic [R-1:0]         error;
  logic [R-1:0][DW-1:0] err_data;
  logic [PE_W-1:0]      pe_out;
  logic [R-1:0]         clr_vec;

  // Only the macro being logged is cleared.
  always_comb begin
    clr_vec = '0;
    if (clr) clr_vec[pe_out[PE_W-1:DATA_W]] = 1'b1;
  end

  for (genvar i = 0; i < R; i++) begin : g_macro
    sram_macro #(.DW(DW), .WORDS(WORDS), .AW(AW)) u_macro (
      .clk      (ck),
      .rst      (reset),
      .sel      (sel),
      .addr     (addr),
      .we       (sram_we),
      .rd_chk   (rd_chk),
      .chk_en   (chk_en),
      .clr      (clr_vec[i]),
      .error    (error[i]),
      .err_data (err_data[i])
    );
  end

  err_or #(.R(R)) u_or (
    .error   (error),
    .err_all (err_all)
  );

  priority_enc #(.R(R), .DW(DW), .MW(MACRO_W)) u_pe (
    .clk      (ck),
    .rst      (reset),
    .error    (error),
    .err_data (err_data),
    .pe_out   (pe_out),
    .more     (more)
  );

  // ---------------- record assembly ----------------
  logic [TS_W-1:0]   ts;
  record_t           payload;
  logic [CODE_W-1:0] fifo_wdata;

  timestamp_cnt #(.TS_W(TS_W)) u_ts (
    .clk (ck),
    .rst (reset),
    .ts  (ts)
  );

  concat_fill u_concat (
    .clk     (ck),
    .rst     (reset),
    .cap_all (cap_all),
    .cap_pe  (cap_pe),
    .ts      (ts),
    .addr    (addr),
    .pe_out  (pe_out),
    .payload (payload)
  );

  ecc_enc u_ecc (
    .data (payload),
    .code (fifo_wdata)
  );

  // ---------------- FIFO and SPI ----------------
  logic              fifo_full, fifo_empty, fifo_re;
  logic [CODE_W-1:0] fifo_rdata;

  async_fifo #(.W(CODE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .rst   (reset),
    .wclk  (ck),
    .we    (fifo_we),
    .wdata (fifo_wdata),
    .full  (fifo_full),
    .rclk  (spi_sck),
    .re    (fifo_re),
    .rdata (fifo_rdata),
    .empty (fifo_empty)
  );

  spi_reader #(.W(CODE_W)) u_spi (
    .rst      (reset),
    .spi_sck  (spi_sck),
    .spi_cs_n (spi_cs_n),
    .spi_sdo  (spi_sdo),
    .empty    (fifo_empty),
    .rdata    (fifo_rdata),
    .re       (fifo_re)
  );

endmodule
