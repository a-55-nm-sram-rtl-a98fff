// config_reg: serial configuration register.
//
// A shift register clocked by SCK: on each rising SCK edge the bits move up
// by one and SIN enters bit 0, so after CFG_W clocks the first bit sent sits
// in the MSB. Bits [1:0] select the data pattern written into and expected
// from every SRAM word; the upper PLL_CFG_W bits are the PLL settings.
// As in the chip, the register is triplicated and is not cleared by RESET,
// so a reset of the scanner does not lose the configuration. The bit
// order and the PLL field width are this design's choices.
module config_reg #(
  parameter int unsigned PLL_CFG_W = 8,
  parameter int unsigned SEL_W     = 2
) (
  input  logic                 sck,
  input  logic                 sin,
  output logic [SEL_W-1:0]     sel,
  output logic [PLL_CFG_W-1:0] pll_cfg
);

  localparam int unsigned CFG_W = PLL_CFG_W + SEL_W;

  logic [CFG_W-1:0] cfg_q;

  tmr_reg #(.W(CFG_W)) u_cfg (
    .clk     (sck),
    .rst     (1'b0),
    .rst_val ('0),
    .d       ({cfg_q[CFG_W-2:0], sin}),
    .q       (cfg_q)
  );

  assign sel     = cfg_q[SEL_W-1:0];
  assign pll_cfg = cfg_q[CFG_W-1:SEL_W];

endmodule
