// tb_sd_rebinning: self-checking test of the DR-slw hit finder of one wire.
//
// Feeds 3000 t-samples: a baseline near 500 ADC counts with +-2 counts of
// random noise and a slow drift, plus pulses of 6..30 counts lasting 25
// t-samples.  The first half runs with polarity 0 and positive pulses, the
// second with polarity 1 and negative pulses.  A reference model in this
// file recomputes the 8- and 128-sample averages by summing the stored
// history directly (not with running sums), applies the threshold and the
// three-sample persistence, and every output is compared one clock after the
// sample strobe.  Samples are strobed every 3 clocks to show that the unit
// only moves on en.
module tb_sd_rebinning;
  import sd_pkg::*;
  logic clk = 0, rst = 1, en = 0, polarity = 0;
  sample_t sample = '0;
  logic [THR_W-1:0] thr = 8'd6;
  logic signed [SAMPLE_W+1:0] q_short, q_long, s;
  logic peak;
  int checks = 0, failures = 0, npeaks = 0, ncycles = 0;

  sd_rebinning dut (.clk, .rst, .en, .sample, .thr, .polarity, .q_short, .q_long, .s, .peak);

  always #5 clk = ~clk;
  always @(posedge clk) ncycles++;
  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist [3000];
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int above = 0, base, pulse_left = 0, amp = 0, qs, ql, sref, ss, sl;
    bit pk;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 3000; k++) begin
      if (k == 1500) polarity <= 1;
      base = 500 + ((k / 300) % 5) - 2;
      if (pulse_left == 0 && ($urandom % 100) < 2) begin
        pulse_left = 25;
        amp = 6 + ($urandom % 25);
      end
      hist[k] = base + int'($urandom % 5) - 2;
      if (pulse_left > 0) begin
        hist[k] += (k >= 1500) ? -amp : amp;
        pulse_left--;
      end
      sample <= sample_t'(hist[k]);
      en <= 1;
      @(posedge clk);
      en <= 0;
      // reference
      ss = 0; sl = 0;
      for (int j = k - 7; j <= k; j++)   if (j >= 0) ss += hist[j];
      for (int j = k - 127; j <= k; j++) if (j >= 0) sl += hist[j];
      qs = ss >>> 3; ql = sl >>> 7;
      sref = (k >= 1500) ? ql - qs : qs - ql;
      above = (sref >= int'(thr)) ? above + 1 : 0;
      pk = (above >= 3);
      #1;
      check("q_short", int'(q_short), qs);
      check("q_long",  int'(q_long),  ql);
      check("s",       int'(s),       sref);
      check("peak",    int'(peak),    int'(pk));
      if (pk) npeaks++;
      @(posedge clk);
      @(posedge clk);
      check("hold", int'(peak), int'(pk));
    end
    checks++;
    if (npeaks == 0) begin failures++; $display("FAIL: no PEAK seen"); end
    $display("peaks=%0d", npeaks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
