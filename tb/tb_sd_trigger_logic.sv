// tb_sd_trigger_logic: checks the PEAK stretching.  For each of the four
// stretch selects a PEAK of random length is applied to a random channel and
// the stretched output must rise one clock later and stay high for exactly
// the PEAK length plus 1000, 2000, 3000 or 5000 clocks (25/50/75/125 us at
// 40 MHz).  A second PEAK arriving while stretched extends the output, and
// the other channels stay low.
module tb_sd_trigger_logic;
  logic clk = 0, rst = 1;
  logic [15:0] peak_in = 0, peak_out;
  logic [1:0] stretch_sel = 0;
  int checks = 0, failures = 0;
  localparam int LEN [4] = '{1000, 2000, 3000, 5000};

  sd_trigger_logic dut (.clk, .rst, .peak_in, .stretch_sel, .peak_out);

  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int ch, plen, hi, gap;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int it = 0; it < 8; it++) begin
      stretch_sel = 2'(it % 4);
      ch = $urandom % 16; plen = 1 + $urandom % 20;
      gap = (it >= 4) ? 300 : 0;   // second PEAK 300 clocks after the first one ends
      @(negedge clk); peak_in[ch] = 1;
      repeat (plen) @(negedge clk);
      peak_in[ch] = 0;
      if (gap != 0) begin
        repeat (gap) @(negedge clk);
        peak_in[ch] = 1;
        repeat (plen) @(negedge clk);
        peak_in[ch] = 0;
      end
      // now count the remaining high time
      hi = 0;
      while (peak_out[ch]) begin
        check("others low", int'(peak_out & ~(16'(1) << ch)), 0);
        @(negedge clk); hi++;
      end
      check("stretch length", hi, LEN[it % 4]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
