// sscan_pkg: constants and types shared by the SRAM soft-error scanner.
//
// Sizes follow the chip: 36 macros of 72-bit x 128-word SRAM, a 36-bit
// timestamp, a 120-bit error record protected to 160 bits before it enters
// the FIFO. The record layout, the ECC code and the FSM encoding are this
// design's own choices (see the README).
package sscan_pkg;

  localparam int unsigned N_MACRO   = 36;   // R in the block diagram
  localparam int unsigned DATA_W    = 72;   // bits per SRAM word
  localparam int unsigned N_WORDS   = 128;  // words per macro
  localparam int unsigned ADDR_W    = 7;    // $clog2(N_WORDS)
  localparam int unsigned MACRO_W   = 6;    // holds a macro number 0..35
  localparam int unsigned TS_W      = 36;   // timestamp counter width
  localparam int unsigned PE_W      = MACRO_W + DATA_W;                  // 78
  localparam int unsigned PAYLOAD_W = 120;  // record before ECC
  localparam int unsigned TS_FIELD_W = PAYLOAD_W - ADDR_W - PE_W;        // 35
  localparam int unsigned CODE_W    = 160;  // record after ECC
  localparam int unsigned ECC_K     = 15;   // data bits per Hamming group
  localparam int unsigned ECC_N     = 20;   // code bits per Hamming group
  localparam int unsigned ECC_GROUPS = PAYLOAD_W / ECC_K;                // 8

  // Pipeline offsets of the captured record relative to the error event:
  // the address field is 4 ahead of the failing word and the timestamp 2
  // ahead of the cycle in which ERROR was first high.
  localparam int unsigned ADDR_BACKSTEP = 4;
  localparam int unsigned TS_SKEW       = 2;

  // Address generator commands issued by the FSM.
  typedef enum logic [1:0] {
    AG_INC  = 2'd0,   // next word
    AG_HOLD = 2'd1,   // stay
    AG_BACK = 2'd2,   // step back ADDR_BACKSTEP words to the failing word
    AG_ZERO = 2'd3    // restart at word 0
  } ag_cmd_e;

  // Scan controller states.
  typedef enum logic [2:0] {
    ST_INIT      = 3'd0,  // write the pattern into every word after reset
    ST_SCAN      = 3'd1,  // read and check one word per cycle
    ST_ERR_WAIT  = 3'd2,  // first cycle after ERR_ALL
    ST_ERR_CAPT  = 3'd3,  // capture address, timestamp, macro, error data
    ST_OVERWRITE = 3'd4,  // write the expected word back to the failing address
    ST_FIFO_WR   = 3'd5,  // FIFO_WE, clear the logged macro
    ST_NEXT_WAIT = 3'd6,  // another macro failed at the same word: wait for encoder
    ST_NEXT_CAPT = 3'd7   // capture that macro's number and error data
  } state_e;

  // Error record as written to the FIFO, MSB first.
  typedef struct packed {
    logic [TS_FIELD_W-1:0] ts;       // timestamp bits [34:0], two ahead of the event
    logic [ADDR_W-1:0]     addr;     // address, four ahead of the failing word
    logic [MACRO_W-1:0]    macro;    // macro number
    logic [DATA_W-1:0]     err_data; // 1 = flipped bit
  } record_t;

endpackage
