// tb_sd_param_regs: checks reset values (threshold 6, polarity 0, stretch 1),
// writes and read-back of every register, and that a write is ignored when
// the chip is not selected or RWB is high.
module tb_sd_param_regs;
  import sd_pkg::*;
  logic clk = 0, rst = 1, cs = 0, strobe = 0, rwb = 1;
  logic [1:0] addr = 0;
  logic [7:0] thrs = 0, rdata, threshold;
  logic polarity;
  logic [1:0] stretch_sel;
  int checks = 0, failures = 0;

  sd_param_regs dut (.clk, .rst, .cs, .strobe, .rwb, .addr, .thrs, .rdata, .threshold, .polarity, .stretch_sel);

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
  task automatic wr(logic [1:0] a, logic [7:0] v, logic sel, logic r);
    @(negedge clk); cs = sel; strobe = 1; rwb = r; addr = a; thrs = v;
    @(negedge clk); strobe = 0; rwb = 1; cs = 0;
  endtask
  task automatic rd(logic [1:0] a, int exp);
    @(negedge clk); cs = 1; rwb = 1; addr = a; #1;
    check("read", int'(rdata), exp);
    cs = 0; #1;
    check("no read when deselected", int'(rdata), 0);
  endtask

  initial begin
    int t, p, s;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check("thr reset", int'(threshold), 6);
    check("pol reset", int'(polarity), 0);
    check("str reset", int'(stretch_sel), 1);
    t = 6; p = 0; s = 1;
    for (int i = 0; i < 60; i++) begin
      logic [1:0] a; logic [7:0] v; logic sel, r;
      a = 2'($urandom % 3); v = 8'($urandom); sel = ($urandom % 4) != 0; r = ($urandom % 4) == 0;
      wr(a, v, sel, r);
      if (sel && !r) begin
        if (a == 0) t = v; else if (a == 1) p = v[0]; else s = v[1:0];
      end
      check("threshold", int'(threshold), t);
      check("polarity", int'(polarity), p);
      check("stretch", int'(stretch_sel), s);
      rd(0, t); rd(1, p); rd(2, s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
