// tb_sd_control_logic: checks the channel sequencer.
// Before the first sync no sample is valid; after it, chan counts 0..15 and
// wraps, a sync on the expected clock keeps the count, a sync in the wrong
// place realigns the count to 0 and flags sync_err, and cs follows ~csb.
// Misplaced syncs are sent at t = 200 and t = 260; the regular sync at
// t = 264 is then misplaced too, so three errors are expected.
module tb_sd_control_logic;
  logic clk = 0, rst = 1, sync_in = 0, csb = 1;
  logic [3:0] chan;
  logic sample_en, cs, sync_err;
  int checks = 0, failures = 0, nerr = 0;

  sd_control_logic dut (.clk, .rst, .sync_in, .csb, .chan, .sample_en, .cs, .sync_err);

  always #5 clk = ~clk;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int exp_ch;
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (5) begin @(negedge clk); check("no en before sync", int'(sample_en), 0); end
    exp_ch = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      csb = t[0];
      // periodic sync every 16 clocks, one misplaced sync at t = 200
      sync_in = (t < 200) ? ((t % 16) == 0) : (((t - 200) % 16) == 0 && t != 216) || t == 260;
      #1;
      if (sync_in) begin
        check("sync_err", int'(sync_err), (t > 0 && exp_ch != 0) ? 1 : 0);
        if (sync_err) nerr++;
        exp_ch = 0;
      end else check("sync_err idle", int'(sync_err), 0);
      check("chan", int'(chan), exp_ch);
      check("en", int'(sample_en), 1);
      check("cs", int'(cs), int'(!csb));
      exp_ch = (exp_ch + 1) % 16;
    end
    check("misplaced syncs seen", nerr, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
