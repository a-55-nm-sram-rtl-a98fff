// sram_scan_chip_tb: end-to-end test of the whole scanner at the chip's
// sizes (36 macros x 72 bits x 128 words, 64-entry FIFO).
//
// The testbench loads the configuration over SIN/SCK, resets the chip, lets
// the init pass run, then upsets SRAM cells directly in the macros' storage
// (as a particle would) and reads the error records back over SPI, decoding
// the ECC and undoing the address/timestamp offsets as a host would. Each
// record is checked against the injected upset: macro, word, flipped bits,
// and a timestamp that lies after the upset, within one scan pass (+ the
// error-handling cycles), and equal to the cycle in which ERR_ALL rose.
// Scenarios, each counted as a mechanism that must occur at least once:
//   single    one flipped bit
//   mcu_word  two bits of one word (one record)
//   multi     three macros failing at the same word (priority encoder loop)
//   rescan    adjacent failing words, the second found after the rescan
//   overwrite the failing word holds the pattern again afterwards
//   fifo_ecc  a bit flipped inside the FIFO is corrected on read-out
//   tmr       upsets in one copy of the address and FSM registers are masked
//   overflow  70 errors without read-out: the first 64 are kept
//   pattern   a second pattern (all ones) selected over SIN, kept over RESET
//   scan_rate every word visited once per 128 cycles; PLLOUT = CK/32
`timescale 1ns/1ps
module sram_scan_chip_tb;
  import sscan_host_pkg::*;

  localparam int R = 36, DW = 72, WORDS = 128, FIFO_DEPTH = 64;

  logic ck = 0, reset = 0, sck = 0, sin = 0, spi_sck = 0, spi_cs_n = 1, spi_sdo, pllout;
  logic [7:0] pll_cfg;

  sram_scan_chip dut (
    .ck(ck), .reset(reset), .sck(sck), .sin(sin), .pll_cfg(pll_cfg), .pllout(pllout),
    .spi_sck(spi_sck), .spi_cs_n(spi_cs_n), .spi_sdo(spi_sdo));

  always #0.5 ck = ~ck;   // 1 GHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- cycle counter (equals the chip's timestamp) ----------------
  longint unsigned cyc = 0;
  always @(posedge ck) begin
    if (reset) cyc <= 0;
    else       cyc <= cyc + 1;
  end

  // cycles at which ERR_ALL rose (observed on the internal OR)
  longint unsigned err_rise[$];
  logic err_all_d = 0;
  always @(posedge ck) begin
    err_all_d <= dut.err_all;
    if (!reset && dut.err_all && !err_all_d) err_rise.push_back(cyc);
  end

  // ---------------- upset injection into the SRAM storage ----------------
  typedef struct {
    int unsigned     macro;
    int unsigned     addr;
    logic [DW-1:0]   mask;
    longint unsigned when;
  } upset_t;
  upset_t expected[$];
  upset_t inj_list[$];
  logic   inj_go = 0;

  for (genvar i = 0; i < R; i++) begin : g_inj
    always @(posedge inj_go) begin
      foreach (inj_list[k]) begin
        if (inj_list[k].macro == i) begin
          logic [DW-1:0] w;
          w = dut.g_macro[i].u_macro.u_sram.mem[inj_list[k].addr];
          dut.g_macro[i].u_macro.u_sram.mem[inj_list[k].addr] = w ^ inj_list[k].mask;
        end
      end
    end
  end

  // Apply the listed upsets in one instant between two clock edges.
  task automatic inject(input upset_t u[$]);
    @(negedge ck);
    foreach (u[k]) begin
      u[k].when = cyc;
      expected.push_back(u[k]);
    end
    inj_list = u;
    #0.1 inj_go = 1;
    #0.1 inj_go = 0;
  endtask

  function automatic upset_t mk(int macro, int addr, logic [DW-1:0] mask);
    upset_t u;
    u.macro = macro; u.addr = addr; u.mask = mask; u.when = 0;
    return u;
  endfunction

  function automatic logic [DW-1:0] bitm(int b);
    logic [DW-1:0] m;
    m = '0; m[b] = 1'b1;
    return m;
  endfunction

  // ---------------- host side: configuration and SPI read-out ----------------
  task automatic load_config(input logic [9:0] w);
    for (int i = 9; i >= 0; i--) begin
      sin = w[i];
      #10 sck = 1;
      #10 sck = 0;
    end
  endtask

  task automatic pulse_reset();
    @(negedge ck) reset = 1;
    repeat (4) @(negedge ck);
    reset = 0;
  endtask

  task automatic spi_frame(output logic valid, output logic [159:0] word);
    spi_cs_n = 0;
    #10;
    for (int i = 0; i <= 160; i++) begin
      if (i == 0) valid = spi_sdo;
      else word[160 - i] = spi_sdo;
      #10 spi_sck = 1;
      #10 spi_sck = 0;
    end
    #10 spi_cs_n = 1;
    #20;
  endtask

  int n_ecc_corr = 0;

  // Read records until two frames in a row come back empty.
  task automatic drain(output host_rec_t recs[$]);
    logic v;
    logic [159:0] w;
    int empties, corr;
    recs.delete();
    empties = 0;
    while (empties < 2) begin
      spi_frame(v, w);
      if (v) begin
        recs.push_back(unpack(ecc_decode(w, corr)));
        n_ecc_corr += corr;
        empties = 0;
      end else begin
        empties++;
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int m_single = 0, m_mcu_word = 0, m_multi = 0, m_rescan = 0, m_overwrite = 0;
  int m_fifo_ecc = 0, m_tmr = 0, m_overflow = 0, m_pattern = 0, m_scan_rate = 0;

  // Compare read records with the expected upsets, in order.
  task automatic check_records(input host_rec_t recs[$], input int n_expect, input string what);
    check(recs.size() == n_expect, $sformatf("%s: %0d records, expected %0d", what, recs.size(), n_expect));
    for (int k = 0; k < recs.size() && k < n_expect && expected.size() > 0; k++) begin
      upset_t u;
      bit ts_seen;
      u = expected.pop_front();
      check(recs[k].macro == u.macro, $sformatf("%s: macro %0d vs %0d", what, recs[k].macro, u.macro));
      check(recs[k].addr == u.addr, $sformatf("%s: word %0d vs %0d", what, recs[k].addr, u.addr));
      check(recs[k].err_data == u.mask, $sformatf("%s: error bits", what));
      // found after the upset and within one pass plus error handling
      check(recs[k].ts > u.when && recs[k].ts <= u.when + WORDS + 2 + 8 * n_expect,
            $sformatf("%s: detection time %0d after upset at %0d", what, recs[k].ts, u.when));
      ts_seen = 0;
      foreach (err_rise[j]) if (err_rise[j] == recs[k].ts) ts_seen = 1;
      check(ts_seen, $sformatf("%s: timestamp %0d is a cycle where ERR_ALL rose", what, recs[k].ts));
    end
    expected.delete();
  endtask

  task automatic wait_cycles(int n);
    repeat (n) @(negedge ck);
  endtask

  logic [DW-1:0] snap [R];
  int snap_addr = 0;
  logic snap_go = 0;
  for (genvar i = 0; i < R; i++) begin : g_snap
    always @(posedge snap_go) snap[i] = dut.g_macro[i].u_macro.u_sram.mem[snap_addr];
  end
  task automatic snapshot(int addr);
    snap_addr = addr;
    #0.1 snap_go = 1;
    #0.1 snap_go = 0;
  endtask

  // ---------------- watchdog ----------------
  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test sequence ----------------
  initial begin
    host_rec_t recs[$];
    upset_t us[$];
    int seen[WORDS];
    bit ok;
    int hi, lo;

    // configuration: PLL setting 0x5A, pattern 0 (all zeros)
    load_config({8'h5A, 2'd0});
    check(pll_cfg == 8'h5A, "PLL setting loaded");
    pulse_reset();
    check(pll_cfg == 8'h5A, "configuration kept over RESET");
    wait_cycles(WORDS + 20);
    check(dut.u_fsm.state == sscan_pkg::ST_SCAN, "scanning after init pass");

    // scan rate: every word exactly once in 128 cycles
    foreach (seen[a]) seen[a] = 0;
    for (int c = 0; c < WORDS; c++) begin
      seen[dut.addr]++;
      @(negedge ck);
    end
    ok = 1;
    foreach (seen[a]) if (seen[a] != 1) ok = 0;
    check(ok, "each word visited once per 128 cycles");
    // PLLOUT period
    @(posedge pllout);
    hi = 0; lo = 0;
    while (pllout) begin @(posedge ck); hi++; #0.1; end
    while (!pllout) begin @(posedge ck); lo++; #0.1; end
    check(hi + lo == 32, "PLLOUT = CK/32");
    if (ok && hi + lo == 32) m_scan_rate++;
    drain(recs);
    check(recs.size() == 0, "no records without upsets");
    err_rise.delete();

    // ---- single bit upset ----
    us.delete(); us.push_back(mk(5, 40, bitm(3)));
    inject(us);
    wait_cycles(300);
    drain(recs);
    check_records(recs, 1, "single");
    if (recs.size() == 1) m_single++;
    snapshot(40);
    check(snap[5] == '0, "failing word overwritten with the pattern");
    if (snap[5] == '0) m_overwrite++;

    // ---- two bits of one word ----
    us.delete(); us.push_back(mk(7, 90, bitm(10) | bitm(11)));
    inject(us);
    wait_cycles(300);
    drain(recs);
    check_records(recs, 1, "mcu_word");
    if (recs.size() == 1 && recs[0].err_data == (bitm(10) | bitm(11))) m_mcu_word++;

    // ---- three macros at the same word, logged lowest number first ----
    us.delete();
    us.push_back(mk(2, 100, bitm(0)));
    us.push_back(mk(20, 100, bitm(71)));
    us.push_back(mk(35, 100, bitm(35) | bitm(36)));
    inject(us);
    wait_cycles(300);
    drain(recs);
    if (recs.size() == 3) begin
      check(recs[0].ts == recs[1].ts && recs[1].ts == recs[2].ts, "multi: one event, one timestamp");
      m_multi++;
    end
    check_records(recs, 3, "multi");

    // ---- adjacent words: the second is found after the rescan ----
    us.delete();
    us.push_back(mk(0, 60, bitm(5)));
    us.push_back(mk(1, 61, bitm(6)));
    inject(us);
    wait_cycles(300);
    drain(recs);
    if (recs.size() == 2) begin
      check(recs[1].ts > recs[0].ts, "rescan: second word found later");
      m_rescan++;
    end
    check_records(recs, 2, "rescan");

    // ---- ECC of the FIFO: flip a stored bit before read-out ----
    us.delete(); us.push_back(mk(11, 7, bitm(20)));
    inject(us);
    wait_cycles(300);
    begin
      int idx;
      logic [159:0] w;
      idx = int'(dut.u_fifo.rbin[5:0]);
      w = dut.u_fifo.mem[idx];
      w[77] = ~w[77];
      dut.u_fifo.mem[idx] = w;
    end
    n_ecc_corr = 0;
    drain(recs);
    check(n_ecc_corr == 1, "flipped FIFO bit corrected by the host decoder");
    if (n_ecc_corr == 1) m_fifo_ecc++;
    check_records(recs, 1, "fifo_ecc");

    // ---- TMR: upset one copy of the address and FSM registers ----
    dut.u_addr.u_addr.copy1 = ~dut.u_addr.u_addr.copy1;
    dut.u_fsm.u_state.copy2 = ~dut.u_fsm.u_state.copy2;
    dut.u_ts.u_cnt.copy0    = ~dut.u_ts.u_cnt.copy0;
    us.delete(); us.push_back(mk(30, 3, bitm(50)));
    inject(us);
    wait_cycles(300);
    drain(recs);
    check_records(recs, 1, "tmr");
    if (recs.size() == 1) m_tmr++;

    // ---- FIFO overflow: 70 failing words, no read-out until the end ----
    us.delete();
    for (int a = 0; a < 70; a++) us.push_back(mk(3, a, bitm(a % DW)));
    inject(us);
    wait_cycles(2000);
    drain(recs);
    check(recs.size() == FIFO_DEPTH, $sformatf("overflow: %0d records kept", recs.size()));
    if (recs.size() == FIFO_DEPTH) m_overflow++;
    // records come in scan order starting wherever the scan was
    ok = 1;
    foreach (recs[k]) begin
      if (recs[k].macro != 3 || recs[k].addr >= 70 || recs[k].err_data != bitm(recs[k].addr % DW)) ok = 0;
      if (k > 0 && recs[k].addr != (recs[k-1].addr + 1) % 70 && recs[k].addr != 0) ok = 0;
    end
    check(ok, "overflow: 64 correct records in scan order");
    snapshot(69);
    check(snap[3] == '0, "overflow: dropped words are still overwritten");
    expected.delete();

    // ---- pattern switch: all ones, kept over RESET ----
    load_config({8'hC3, 2'd1});
    pulse_reset();
    check(pll_cfg == 8'hC3, "new PLL setting");
    wait_cycles(WORDS + 20);
    snapshot(17);
    check(snap[9] == '1, "init pass wrote the all-ones pattern");
    err_rise.delete();
    drain(recs);
    check(recs.size() == 0, "pattern: no records after reset");
    us.delete(); us.push_back(mk(9, 17, bitm(64)));
    inject(us);
    wait_cycles(300);
    drain(recs);
    check_records(recs, 1, "pattern");
    if (recs.size() == 1) m_pattern++;

    // ---- every mechanism must have happened ----
    $display("mechanisms: single=%0d mcu_word=%0d multi=%0d rescan=%0d overwrite=%0d fifo_ecc=%0d tmr=%0d overflow=%0d pattern=%0d scan_rate=%0d",
             m_single, m_mcu_word, m_multi, m_rescan, m_overwrite, m_fifo_ecc, m_tmr, m_overflow, m_pattern, m_scan_rate);
    check(m_single > 0, "mechanism single");
    check(m_mcu_word > 0, "mechanism mcu_word");
    check(m_multi > 0, "mechanism multi");
    check(m_rescan > 0, "mechanism rescan");
    check(m_overwrite > 0, "mechanism overwrite");
    check(m_fifo_ecc > 0, "mechanism fifo_ecc");
    check(m_tmr > 0, "mechanism tmr");
    check(m_overflow > 0, "mechanism overflow");
    check(m_pattern > 0, "mechanism pattern");
    check(m_scan_rate > 0, "mechanism scan_rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
