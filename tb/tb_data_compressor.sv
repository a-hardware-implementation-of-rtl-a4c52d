// tb_data_compressor: round-trip test of the four buffer formats.
//
// 800 t-samples of 16 channels are streamed one channel per clock.  The mode
// changes every 50 t-samples (raw, compression 4, full difference,
// compression 2, ...).  Signals random-walk by a few counts with occasional
// steps of 8..60 counts (compression-4 overflows) and, outside compression-2
// t-samples, rare jumps of several hundred counts.  Every output word is
// collected; a decoder written here from the word layouts rebuilds the
// samples and must reproduce the input exactly, the DAEDALUS field of raw
// words must carry the tag, the number of words per t-sample must match the
// format (16, 4..16, 16, 8) and the overflow pulses must match the groups that
// had a difference outside +-7.  The output must keep up with the input
// rate of one sample per clock: the last word leaves at most 4 clocks after
// the last sample.
module tb_data_compressor;
  import sd_pkg::*;
  localparam int NF = 800;
  logic clk = 0, rst = 1, in_valid = 0;
  comp_mode_e mode = MODE_RAW;
  logic [3:0] in_chan = 0;
  sample_t in_sample = 0;
  logic [5:0] in_tag = 0;
  logic out_valid, out_first, overflow;
  word_t out_word;
  int checks = 0, failures = 0;

  data_compressor dut (.clk, .rst, .mode, .in_valid, .in_chan, .in_sample, .in_tag,
                       .out_valid, .out_word, .out_first, .overflow);

  always #5 clk = ~clk;
  initial begin
    #1000000;
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

  int smp [NF][16];
  int tag [NF][16];
  comp_mode_e fmode [NF];
  word_t words [$];
  bit    firsts [$];
  int ovf_seen = 0, ovf_exp = 0;

  int cyc = 0, last_out_cyc = 0, last_in_cyc = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (in_valid) last_in_cyc = cyc;
    if (out_valid) begin words.push_back(out_word); firsts.push_back(out_first); last_out_cyc = cyc; end
    if (overflow) ovf_seen++;
  end

  function automatic int sx(int v, int bits);
    return (v >= (1 << (bits - 1))) ? v - (1 << bits) : v;
  endfunction

  initial begin
    int cur [16];
    int p [16];
    int k, nw, big;
    foreach (cur[c]) cur[c] = 300 + 20 * c;
    for (int f = 0; f < NF; f++) begin
      fmode[f] = comp_mode_e'((f / 50) % 4);
      for (int c = 0; c < 16; c++) begin
        int step;
        step = int'($urandom % 7) - 3;
        if (($urandom % 40) == 0) step = (($urandom % 2) ? 1 : -1) * int'(8 + $urandom % 53);
        if (fmode[f] != MODE_COMP2 && ($urandom % 300) == 0) step = 400;
        cur[c] = (cur[c] + step + 1024) % 1024;
        smp[f][c] = cur[c];
        tag[f][c] = $urandom % 64;
      end
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        in_valid = 1; in_chan = 4'(c); in_sample = sample_t'(smp[f][c]);
        in_tag = 6'(tag[f][c]); mode = fmode[f];
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);

    // throughput: the output keeps up with one sample per clock; the last
    // word leaves at most 4 clocks after the last sample arrived
    check("drain latency <= 4 clocks", int'(last_out_cyc - last_in_cyc <= 4), 1);
    // decode
    foreach (p[c]) p[c] = 0;
    k = 0;
    for (int f = 0; f < NF; f++) begin
      int dec [16];
      int start;
      start = k;
      check("first flag", int'(firsts[k]), 1);
      case (fmode[f])
        MODE_RAW: for (int c = 0; c < 16; c++) begin
          dec[c] = words[k][9:0];
          check("raw tag", int'(words[k][15:10]), tag[f][c]);
          k++;
        end
        MODE_FULLDIFF: for (int c = 0; c < 16; c++) begin
          check("fulldiff flag", int'(words[k][15:10]), 32);
          dec[c] = (p[c] + int'(words[k][9:0])) % 1024;
          k++;
        end
        MODE_COMP2: for (int c = 0; c < 16; c += 2) begin
          dec[c]   = (p[c]   + sx(words[k][15:8], 8) + 1024) % 1024;
          dec[c+1] = (p[c+1] + sx(words[k][7:0], 8)  + 1024) % 1024;
          k++;
        end
        default: for (int g = 0; g < 4; g++) begin
          bit ov;
          ov = 0;
          for (int c = 4 * g; c < 4 * g + 4; c++) begin
            int d;
            d = smp[f][c] - ((f == 0) ? 0 : smp[f-1][c]);
            if (d > 7 || d < -7) ov = 1;
          end
          if (ov) ovf_exp++;
          if (words[k][15:12] == 4'b1000) begin
            check("overflow expected", int'(ov), 1);
            for (int c = 4 * g; c < 4 * g + 4; c++) begin
              check("overflow flag", int'(words[k][15:10]), 32);
              dec[c] = (p[c] + int'(words[k][9:0])) % 1024;
              k++;
            end
          end else begin
            check("no overflow expected", int'(ov), 0);
            for (int j = 0; j < 4; j++)
              dec[4*g+j] = (p[4*g+j] + sx(int'(words[k][15-4*j -: 4]), 4) + 1024) % 1024;
            k++;
          end
        end
      endcase
      nw = k - start;
      if (fmode[f] == MODE_RAW || fmode[f] == MODE_FULLDIFF) check("words/t-sample", nw, 16);
      if (fmode[f] == MODE_COMP2) check("words/t-sample", nw, 8);
      for (int c = 0; c < 16; c++) begin
        check("decoded sample", dec[c], smp[f][c]);
        p[c] = dec[c];
      end
    end
    check("all words used", words.size(), k);
    check("overflow pulses", ovf_seen, ovf_exp);
    checks++;
    if (ovf_exp == 0) begin failures++; $display("FAIL: no overflow exercised"); end
    $display("words=%0d overflows=%0d", k, ovf_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
