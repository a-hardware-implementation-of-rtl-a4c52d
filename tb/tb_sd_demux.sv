// tb_sd_demux: checks the 1:16 demultiplexer.  For random channel indices and
// samples, one clock later exactly the strobe of that channel is high and the
// sample register holds the sample; with en low no strobe appears.
module tb_sd_demux;
  import sd_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic [3:0] chan = 0;
  sample_t data_in = 0, sample;
  logic [15:0] valid;
  int checks = 0, failures = 0;

  sd_demux dut (.clk, .rst, .en, .chan, .data_in, .sample, .valid);

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
    logic [3:0] c; sample_t d; logic e;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 500; t++) begin
      c = 4'($urandom); d = sample_t'($urandom); e = ($urandom % 4) != 0;
      @(negedge clk);
      chan = c; data_in = d; en = e;
      @(posedge clk); #1;
      check("valid", int'(valid), e ? (1 << c) : 0);
      check("sample", int'(sample), int'(d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
