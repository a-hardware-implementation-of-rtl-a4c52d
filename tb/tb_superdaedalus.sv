// tb_superdaedalus: checks the 16-channel hit-finding chip.
//
// The parameter bus sets threshold 5 and the 25 us stretch and reads the
// threshold back.  3000 t-samples of 16 wires are then streamed one channel per
// clock with SYNC_IN on channel 0: baselines that differ per wire, +-2 counts
// of noise, and pulses of 6..30 counts over 25 t-samples.  At t-sample 1500
// the polarity register is set to 1 and the pulses become negative.  For
// every wire a reference model in this file (direct sums over the stored
// history) gives the expected unstretched PEAK, checked for all 16 wires once
// per t-sample; the stretched PEAK<15:0> is checked every clock against a
// counter model driven by the unstretched PEAK.
module tb_superdaedalus;
  import sd_pkg::*;
  localparam int NF = 3000;
  logic clk = 0, rst = 1, csb = 1, sync_in = 0, rwb = 1, strobe = 0;
  sample_t data_in = 0;
  logic [1:0] addr = 0;
  logic [7:0] thrs = 0, rdata;
  logic sync_err;
  logic [15:0] peak_raw, peak;
  int checks = 0, failures = 0, npk = 0, nstretch = 0;

  superdaedalus dut (.clk, .rst, .csb, .sync_in, .data_in, .rwb, .strobe, .addr, .thrs,
                     .rdata, .sync_err, .peak_raw, .peak);

  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask
  task automatic wr(logic [1:0] a, logic [7:0] v);
    @(negedge clk); csb = 0; rwb = 0; strobe = 1; addr = a; thrs = v;
    @(negedge clk); csb = 1; rwb = 1; strobe = 0;
  endtask

  // stretched-output model
  int scnt [16];
  always @(posedge clk) begin
    for (int c = 0; c < 16; c++)
      if (rst) scnt[c] <= 0;
      else if (peak_raw[c]) scnt[c] <= 1000;
      else if (scnt[c] > 0) scnt[c] <= scnt[c] - 1;
  end

  int smp [NF][16];
  int above [16];

  function automatic bit ref_peak(int f, int c, bit pol);
    int ss, sl, s;
    ss = 0; sl = 0;
    for (int j = f - 7; j <= f; j++)   if (j >= 0) ss += smp[j][c];
    for (int j = f - 127; j <= f; j++) if (j >= 0) sl += smp[j][c];
    s = pol ? (sl >>> 7) - (ss >>> 3) : (ss >>> 3) - (sl >>> 7);
    above[c] = (s >= 5) ? above[c] + 1 : 0;
    return above[c] >= 3;
  endfunction

  initial begin
    int left [16], amp [16];
    foreach (left[c]) begin left[c] = 0; above[c] = 0; end
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < 16; c++) begin
        if (left[c] == 0 && ($urandom % 150) == 0) begin left[c] = 25; amp[c] = 6 + $urandom % 25; end
        smp[f][c] = 200 + 30 * c + int'($urandom % 5) - 2;
        if (left[c] > 0) begin
          smp[f][c] += (f >= 1500) ? -amp[c] : amp[c];
          left[c]--;
        end
      end
    repeat (2) @(posedge clk);
    rst <= 0;
    wr(REG_THRESHOLD, 8'd5);
    wr(REG_STRETCH, 8'd0);
    @(negedge clk); csb = 0; rwb = 1; addr = REG_THRESHOLD; #1;
    check("threshold read-back", int'(rdata), 5);
    csb = 1;
    for (int k = 0; k < NF * 16 + 2; k++) begin
      @(negedge clk);
      // scheduled checks, before driving the next inputs
      for (int c = 0; c < 16; c++) begin
        check("stretched peak", int'(peak[c]), int'(scnt[c] != 0));
        if (peak[c]) nstretch++;
      end
      if (k % 16 == 1 && k >= 17) begin
        int f;
        f = k / 16 - 1;
        for (int c = 0; c < 16; c++) begin
          bit e;
          e = ref_peak(f, c, f >= 1500);
          check("peak_raw", int'(peak_raw[c]), int'(e));
          if (e) npk++;
        end
      end
      if (k < NF * 16) begin
        data_in = sample_t'(smp[k / 16][k % 16]);
        sync_in = (k % 16) == 0;
        if (k == 1500 * 16) begin csb = 0; rwb = 0; strobe = 1; addr = REG_POLARITY; thrs = 8'd1; end
        else begin csb = 1; rwb = 1; strobe = 0; end
      end else sync_in = 0;
      #1;
      check("sync_err", int'(sync_err), 0);
    end
    checks++;
    if (npk == 0 || nstretch == 0) begin failures++; $display("FAIL: no peaks"); end
    $display("peak t-samples=%0d", npk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
