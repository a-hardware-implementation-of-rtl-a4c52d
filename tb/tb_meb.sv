// tb_meb: checks the multi-event buffers with NBUF = 4 and LEN_MAX = 256.
//
// A writer emulates a compressor lane: every t-sample takes 16 clocks and
// carries 4..16 words, the first flagged with wr_first, each word encoding
// its t-sample number and position.  Triggers are given at random t-samples.
// For every trigger that is taken, the expected buffer holds the last LEN
// t-samples up to and including the one being written when the trigger came
// (fewer if the buffer started later), in time order and with every word of
// each t-sample.  The DAQ side takes words with a random ready.  Phases: a
// 64-sample buffer length, a 256-sample length, and a DAQ stall during which
// the buffers fill up: three buffers must then be frozen (one is always being
// written) and further triggers must be reported lost.
module tb_meb;
  import sd_pkg::*;
  localparam int NBUF = 4, LMAX = 256;
  logic clk = 0, rst = 1;
  logic [2:0] len_sel = 0;
  logic wr_valid = 0, wr_first = 0, trigger = 0, rd_ready = 0;
  word_t wr_word = 0, rd_data;
  logic free_avail, trig_lost, rd_valid, rd_last;
  logic [2:0] frozen_cnt;
  int checks = 0, failures = 0;

  meb #(.NBUF(NBUF), .LEN_MAX(LMAX)) dut (
    .clk, .rst, .len_sel, .wr_valid, .wr_word, .wr_first, .trigger, .free_avail, .trig_lost,
    .frozen_cnt, .rd_valid, .rd_data, .rd_last, .rd_ready);

  always #5 clk = ~clk;
  initial begin
    #20000000;
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

  int nwords [20000];
  word_t expq [$];          // expected words in readout order
  int    explast [$];       // 1 where a buffer ends
  int buf_start = 0, buf_len = 64, taken = 0, lost = 0, nread = 0, stall = 0;
  bit ready_rand = 1;

  // DAQ side
  always @(negedge clk) rd_ready = ready_rand && !stall && (($urandom % 4) != 0);
  always @(posedge clk) if (!rst && rd_valid && rd_ready) begin
    if (expq.size() == 0) begin
      check("unexpected word", 1, 0);
    end else begin
      check("read word", int'(rd_data), int'(expq.pop_front()));
      check("rd_last", int'(rd_last), explast.pop_front());
    end
    nread++;
  end

  function automatic word_t wval(int t, int i);
    return word_t'({t[11:0], i[3:0]});
  endfunction

  task automatic expect_buffer(int tlast);
    int from;
    from = (tlast - buf_len + 1 > buf_start) ? tlast - buf_len + 1 : buf_start;
    for (int t = from; t <= tlast; t++)
      for (int i = 0; i < nwords[t]; i++) begin
        expq.push_back(wval(t, i));
        explast.push_back((t == tlast && i == nwords[t] - 1) ? 1 : 0);
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 2400; t++) begin
      bit trig_now;
      if (t == 800)  len_sel = 2;     // buffers started from now on hold 256 t-samples
      if (t == 1700) stall = 1;       // DAQ stops reading
      if (t == 2100) begin
        check("all but one buffer frozen at the end of the stall", int'(frozen_cnt), NBUF - 1);
        stall = 0;
      end
      nwords[t] = 4 + $urandom % 13;
      trig_now = (t > 10) && (($urandom % ((t >= 1700 && t < 2100) ? 15 : 250)) == 0);
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        wr_valid = (c < nwords[t]);
        wr_first = (c == 0);
        wr_word  = wval(t, c);
        trigger  = trig_now && (c == 5);
        if (c == 0 && t == buf_start) buf_len = 64 << len_sel;
        #1;
        if (trigger) begin
          if (!trig_lost) begin
            expect_buffer(t);
            buf_start = t + 1;
            taken++;
          end else begin
            lost++;
          end
          check("trig_lost = !free_avail", int'(trig_lost), int'(!free_avail));
        end
      end
    end
    @(negedge clk); wr_valid = 0; trigger = 0;
    while (expq.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    check("frozen buffers left", int'(frozen_cnt), 0);
    checks++;
    if (lost == 0) begin failures++; $display("FAIL: no lost trigger exercised"); end
    $display("taken=%0d lost=%0d words read=%0d", taken, lost, nread);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
