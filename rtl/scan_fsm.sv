// scan_fsm: controller of the error scan.
//
// After RESET the FSM writes the pattern into every word (ST_INIT, WORDS
// cycles), then scans: one address per cycle, each read checked two cycles
// later, so every word is checked once per WORDS cycles. When ERR_ALL rises
// (error found in the word read two cycles earlier; timestamp M in this
// cycle) the FSM runs the error sequence, cycle by cycle:
//   ST_ERR_WAIT   ADD = e+3, timestamp M+1
//   ST_ERR_CAPT   ADD = e+4, timestamp M+2; the record {timestamp, ADD,
//                 macro, error data} is captured; the address steps back 4
//   ST_OVERWRITE  ADD = e, SRAM_WE: the expected word is written back
//   ST_FIFO_WR    ADD = e+1, FIFO_WE; the logged macro's ERROR is cleared;
//                 the read of e+1 is the first checked read again
//   ST_SCAN       ADD = e+2 ...
// so the address in a record is 4 and its timestamp 2 ahead of the event,
// as in the chip's timing chart. Reads issued during the sequence are not
// checked (words e+1..e+4 are read again after it). If another macro failed
// at the same word ("more" from the priority encoder), ST_FIFO_WR holds the
// address and goes to ST_NEXT_WAIT / ST_NEXT_CAPT, which capture the next
// macro's number and error data with the same address and timestamp, then
// back to ST_FIFO_WR. The state register is triplicated.
// The chart's single-error sequence follows the chip; the init pass and the
// multi-macro loop are this design's own.
module scan_fsm
  import sscan_pkg::*;
#(
  parameter int unsigned WORDS = N_WORDS,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          err_all,   // OR of all macros' ERROR
  input  logic          more,      // priority encoder: another macro waiting
  input  logic [AW-1:0] addr,      // current ADD
  output ag_cmd_e       ag_cmd,
  output logic          sram_we,   // SRAM_WE
  output logic          rd_chk,    // this cycle's read is to be checked
  output logic          chk_en,    // checkers may latch new errors
  output logic          cap_all,   // capture timestamp, ADD, encoder output
  output logic          cap_pe,    // capture encoder output only
  output logic          fifo_we,   // FIFO_WE
  output logic          clr,       // clear the macro being logged
  output state_e        state
);

  state_e     state_d;
  logic [2:0] state_q;

  tmr_reg #(.W(3)) u_state (
    .clk     (clk),
    .rst     (rst),
    .rst_val (3'(ST_INIT)),
    .d       (3'(state_d)),
    .q       (state_q)
  );

  assign state = state_e'(state_q);

  always_comb begin
    state_d = state;
    ag_cmd  = AG_INC;
    sram_we = 1'b0;
    rd_chk  = 1'b0;
    chk_en  = 1'b0;
    cap_all = 1'b0;
    cap_pe  = 1'b0;
    fifo_we = 1'b0;
    clr     = 1'b0;
    unique case (state)
      ST_INIT: begin
        sram_we = 1'b1;
        if (addr == AW'(WORDS - 1)) begin
          state_d = ST_SCAN;
          ag_cmd  = AG_ZERO;
        end
      end
      ST_SCAN: begin
        if (err_all) begin
          state_d = ST_ERR_WAIT;
        end else begin
          rd_chk = 1'b1;
          chk_en = 1'b1;
        end
      end
      ST_ERR_WAIT: state_d = ST_ERR_CAPT;
      ST_ERR_CAPT: begin
        cap_all = 1'b1;
        ag_cmd  = AG_BACK;
        state_d = ST_OVERWRITE;
      end
      ST_OVERWRITE: begin
        sram_we = 1'b1;
        state_d = ST_FIFO_WR;
      end
      ST_FIFO_WR: begin
        fifo_we = 1'b1;
        clr     = 1'b1;
        if (more) begin
          ag_cmd  = AG_HOLD;
          state_d = ST_NEXT_WAIT;
        end else begin
          rd_chk  = 1'b1;
          state_d = ST_SCAN;
        end
      end
      ST_NEXT_WAIT: begin
        ag_cmd  = AG_HOLD;
        state_d = ST_NEXT_CAPT;
      end
      ST_NEXT_CAPT: begin
        ag_cmd  = AG_HOLD;
        cap_pe  = 1'b1;
        state_d = ST_FIFO_WR;
      end
      default: begin
        ag_cmd  = AG_ZERO;
        state_d = ST_INIT;
      end
    endcase
  end

  // A FIFO write always follows a capture of the record it writes.
  a_overwrite_then_write: assert property (@(posedge clk) disable iff (rst)
    (state == ST_OVERWRITE) |=> (state == ST_FIFO_WR && fifo_we));

endmodule
