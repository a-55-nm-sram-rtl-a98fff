// beam_run_tb: a simulated irradiation run on the full-size scanner.
//
// Particle hits arrive at random times (200..700 CK cycles apart) and each
// upsets one to three bits of a random word in a random macro. Every ten hits
// the host drains the FIFO over SPI. Each record is then paired, as in the
// off-line event building, with the hit that lies at most one scan period
// (128 cycles) plus the 2-cycle check pipeline before its timestamp. The test
// checks that every record pairs with exactly one hit, that location and
// bits agree, that no hit is lost, and that the hit-to-detection delay is
// spread uniformly over the scan period: its mean must be close to half a
// period (64 cycles; 118.5 ns at 540 MHz).
`timescale 1ns/1ps
module beam_run_tb;
  import sscan_host_pkg::*;

  localparam int R = 36, DW = 72, WORDS = 128;
  localparam int N_HITS = 150;

  logic ck = 0, reset = 0, sck = 0, sin = 0, spi_sck = 0, spi_cs_n = 1, spi_sdo, pllout;
  logic [7:0] pll_cfg;

  sram_scan_chip dut (
    .ck(ck), .reset(reset), .sck(sck), .sin(sin), .pll_cfg(pll_cfg), .pllout(pllout),
    .spi_sck(spi_sck), .spi_cs_n(spi_cs_n), .spi_sdo(spi_sdo));

  always #0.5 ck = ~ck;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge ck) begin
    if (reset) cyc <= 0;
    else       cyc <= cyc + 1;
  end

  typedef struct {
    int unsigned     macro;
    int unsigned     addr;
    logic [DW-1:0]   mask;
    longint unsigned when;
    int              paired;
  } hit_t;
  hit_t hits[$];

  int unsigned   inj_macro, inj_addr;
  logic [DW-1:0] inj_mask;
  logic          inj_go = 0;

  for (genvar i = 0; i < R; i++) begin : g_inj
    always @(posedge inj_go) begin
      if (inj_macro == i) begin
        logic [DW-1:0] w;
        w = dut.g_macro[i].u_macro.u_sram.mem[inj_addr];
        dut.g_macro[i].u_macro.u_sram.mem[inj_addr] = w ^ inj_mask;
      end
    end
  end

  task automatic hit();
    hit_t h;
    int nb, b;
    @(negedge ck);
    h.macro = $urandom % R;
    h.addr  = $urandom % WORDS;
    h.mask  = '0;
    nb = 1 + $urandom % 3;
    for (int k = 0; k < nb; k++) begin
      b = $urandom % DW;
      h.mask[b] = 1'b1;
    end
    h.when = cyc;
    h.paired = 0;
    hits.push_back(h);
    inj_macro = h.macro; inj_addr = h.addr; inj_mask = h.mask;
    #0.1 inj_go = 1;
    #0.1 inj_go = 0;
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

  host_rec_t recs[$];
  task automatic drain();
    logic v;
    logic [159:0] w;
    int empties, corr;
    empties = 0;
    while (empties < 2) begin
      spi_frame(v, w);
      if (v) begin recs.push_back(unpack(ecc_decode(w, corr))); empties = 0; end
      else empties++;
    end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sum_d, mean_d;
    longint unsigned d, max_d;
    int n_pair;
    // pattern 0, any PLL setting
    for (int i = 9; i >= 0; i--) begin sin = 0; #10 sck = 1; #10 sck = 0; end
    @(negedge ck) reset = 1;
    repeat (4) @(negedge ck);
    reset = 0;
    repeat (WORDS + 20) @(negedge ck);

    for (int n = 0; n < N_HITS; n++) begin
      hit();
      repeat (200 + $urandom % 500) @(negedge ck);
      if (n % 10 == 9) drain();
    end
    repeat (300) @(negedge ck);
    drain();

    // event building: pair each record with the hit in its window
    check(recs.size() == N_HITS, $sformatf("%0d records for %0d hits", recs.size(), N_HITS));
    sum_d = 0; max_d = 0; n_pair = 0;
    foreach (recs[k]) begin
      int found;
      found = -1;
      foreach (hits[j]) begin
        if (hits[j].when < recs[k].ts && recs[k].ts <= hits[j].when + WORDS + 2) begin
          check(found < 0, "at most one hit in a record's window");
          found = j;
        end
      end
      check(found >= 0, $sformatf("record at %0d pairs with a hit", recs[k].ts));
      if (found >= 0) begin
        hits[found].paired++;
        check(recs[k].macro == hits[found].macro && recs[k].addr == hits[found].addr,
              "paired record has the hit's location");
        check(recs[k].err_data == hits[found].mask, "paired record has the hit's bits");
        d = recs[k].ts - hits[found].when;
        sum_d += real'(d);
        if (d > max_d) max_d = d;
        n_pair++;
      end
    end
    foreach (hits[j]) check(hits[j].paired == 1, "every hit paired once");
    mean_d = (n_pair > 0) ? sum_d / n_pair : 0.0;
    $display("paired %0d records; detection delay mean %0.1f cycles (%0.1f ns at 540 MHz), max %0d cycles",
             n_pair, mean_d, mean_d * 1000.0 / 540.0, max_d);
    check(max_d <= WORDS + 2, "every hit detected within one scan period plus the check pipeline");
    check(mean_d > 54.0 && mean_d < 78.0, "mean delay near half a scan period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
