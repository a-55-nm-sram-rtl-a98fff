// addr_gen: SRAM address generator shared by all macros.
//
// A triplicated AW-bit counter. Commands from the scan FSM, applied at the
// rising clock:
//   AG_INC   next word (wraps from WORDS-1 to 0) - one word per cycle while
//            scanning, so all words are visited every WORDS cycles;
//   AG_HOLD  keep the address;
//   AG_BACK  step back BACKSTEP words. The FSM issues it two cycles after
//            ERR_ALL, when the address has run BACKSTEP words past the
//            failing one, so the next cycle addresses the failing word for
//            the overwrite;
//   AG_ZERO  restart at word 0.
// RESET clears the address. The step back by 4 follows the chip's timing
// chart; HOLD and ZERO are this design's own (multi-macro logging, init).
module addr_gen
  import sscan_pkg::*;
#(
  parameter int unsigned AW       = ADDR_W,
  parameter int unsigned BACKSTEP = ADDR_BACKSTEP
) (
  input  logic          clk,
  input  logic          rst,
  input  ag_cmd_e       cmd,
  output logic [AW-1:0] addr
);

  logic [AW-1:0] addr_d;

  always_comb begin
    unique case (cmd)
      AG_INC:  addr_d = addr + AW'(1);
      AG_HOLD: addr_d = addr;
      AG_BACK: addr_d = addr - AW'(BACKSTEP);
      default: addr_d = '0;
    endcase
  end

  tmr_reg #(.W(AW)) u_addr (
    .clk     (clk),
    .rst     (rst),
    .rst_val ('0),
    .d       (addr_d),
    .q       (addr)
  );

endmodule
