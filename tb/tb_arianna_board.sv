// tb_arianna_board: end-to-end test of the 32-channel board at its default
// sizes (4 buffers of up to 4096 t-samples per lane).
//
// Two 16-wire streams are generated on the fly, one channel per clock with a
// sync on channel 0: per-wire baselines with +-2 counts of noise, plus
// "tracks" that put a 20..25-count, 25 t-sample pulse on a run of consecutive
// wires, one t-sample later on each next wire (an inclined track).  Every
// generated sample is kept so that every event read from the DAQ port can be
// decoded and compared sample by sample.
//
// Sequence (each step streams t-samples without interruption):
//   1  compression 4, 4096-sample buffers, external trigger source during the
//      start-up ramp of the 128-sample averages, then GTO; a track on wires
//      4..23 fires GTO and freezes a full 4096-sample event.
//   2  buffer length 64 from now on; an external trigger freezes the
//      partly filled buffer that was started at event 1.
//   3  raw mode, external trigger; 4  full-difference mode, external trigger;
//   5  compression 2, GTO from a track on wires 8..27;
//   6  polarity 1 written to both chips while streaming, compression 4, a
//      negative-going track on wires 2..29 fires GTO;
//   7  the DAQ stops taking words, four external triggers 100 t-samples apart:
//      three are taken and the fourth is lost; then the DAQ resumes.
// Checks: every event decodes to exactly the generated samples of a contiguous
// window ending at the t-sample of its trigger (+-2), event 1 holds 4096
// t-samples, 64-sample events hold 64, the number of events equals the
// triggers taken.  Each mechanism (GTO trigger, external trigger, COMP4
// overflow, each format, stretching, polarity switch, lost trigger, DAQ
// back-pressure, wrapped and partly filled buffer) is counted and must occur.
module tb_arianna_board;
  import sd_pkg::*;
  localparam int MAXF = 16000;

  logic clk = 0, rst = 1, sync_in = 0;
  sample_t data_in [2];
  logic [1:0] csb = 2'b11;
  logic rwb = 1, strobe = 0;
  logic [1:0] addr = 0;
  logic [7:0] thrs = 0, rdata;
  comp_mode_e comp_mode = MODE_COMP4;
  logic [2:0] meb_len_sel = 3'd6;
  logic [4:0] majority = 5'd8;
  trig_src_e trig_src = TRIG_EXTERNAL;
  logic ext_trig = 0;
  logic [31:0] peak;
  logic gto, trigger, trig_lost, sync_err, daq_valid, daq_lane, daq_last, daq_ready;
  logic overflow [2];
  logic [2:0] events_pending;
  word_t daq_data;

  arianna_board dut (
    .clk, .rst, .sync_in, .data_in, .csb, .rwb, .strobe, .addr, .thrs, .rdata,
    .comp_mode, .meb_len_sel, .majority, .trig_src, .ext_trig,
    .peak, .gto, .trigger, .trig_lost, .overflow, .sync_err, .events_pending,
    .daq_valid, .daq_data, .daq_lane, .daq_last, .daq_ready);

  always #5 clk = ~clk;
  initial begin
    #40000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int checks = 0, failures = 0;
  function automatic void check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endfunction

  // ---------------- stimulus ----------------
  int smp [MAXF][32];
  comp_mode_e fmode [MAXF];
  int trk_t0 [$], trk_w0 [$], trk_w1 [$], trk_amp [$];
  int frame = 0;              // t-sample being streamed
  bit daq_hold = 0;

  function automatic int gen(int t, int w);
    int v;
    v = 150 + 7 * w + int'($urandom % 5) - 2;
    foreach (trk_t0[i]) begin
      int ts;
      ts = trk_t0[i] + (w - trk_w0[i]);
      if (w >= trk_w0[i] && w <= trk_w1[i] && t >= ts && t < ts + 25) v += trk_amp[i];
    end
    return v;
  endfunction

  // mechanism counters
  int n_gto_evt = 0, n_ext_evt = 0, n_lost = 0, n_ovf = 0, n_bp = 0, n_stretch = 0;
  int n_mode [4] = '{0, 0, 0, 0};
  int n_pol_evt = 0, n_full = 0, n_partial = 0, n_gto_hi = 0;
  bit pol_now = 0;

  // accepted triggers: t-sample, source, polarity
  int tr_frame [$];
  bit tr_gto [$];
  bit tr_pol [$];

  always @(posedge clk) if (!rst) begin
    if (trigger && !trig_lost) begin
      tr_frame.push_back(frame);
      tr_gto.push_back(trig_src == TRIG_GTO);
      tr_pol.push_back(pol_now);
    end
    if (trig_lost) n_lost++;
    if (overflow[0] || overflow[1]) n_ovf++;
    if (daq_valid && !daq_ready) n_bp++;
    if (gto) n_gto_hi++;
  end

  task automatic run_frames(int n, int ext_at = -1, int pol_write_at = -1);
    for (int i = 0; i < n; i++) begin
      fmode[frame] = comp_mode;
      for (int w = 0; w < 32; w++) smp[frame][w] = gen(frame, w);
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        sync_in    = (c == 0);
        data_in[0] = sample_t'(smp[frame][c]);
        data_in[1] = sample_t'(smp[frame][16 + c]);
        ext_trig   = (i == ext_at) && (c < 4);
        if (i == pol_write_at && c == 0) begin
          csb = 2'b00; rwb = 0; strobe = 1; addr = REG_POLARITY; thrs = 8'd1;
          pol_now = 1;
        end else begin
          csb = 2'b11; rwb = 1; strobe = 0;
        end
      end
      frame++;
    end
  endtask

  task automatic wr(logic [1:0] sel_n, logic [1:0] a, logic [7:0] v);
    @(negedge clk); csb = sel_n; rwb = 0; strobe = 1; addr = a; thrs = v;
    @(negedge clk); csb = 2'b11; rwb = 1; strobe = 0;
  endtask

  // ---------------- DAQ side ----------------
  always @(negedge clk) daq_ready = !daq_hold && (($urandom % 8) != 0);

  word_t ev_words [2][$];
  int    n_events = 0;
  always @(posedge clk) if (!rst && daq_valid && daq_ready) begin
    ev_words[daq_lane].push_back(daq_data);
    if (daq_last) begin
      decode_event(n_events);
      n_events++;
      ev_words[0].delete();
      ev_words[1].delete();
    end
  end

  function automatic int sx(int v, int bits);
    return (v >= (1 << (bits - 1))) ? v - (1 << bits) : v;
  endfunction

  int val [2][$];   // decoded values of the event being checked

  // Decode one lane of an event in format m into per-t-sample differences
  // (or raw values); returns the number of t-samples.
  function automatic int parse_lane(int l, comp_mode_e m);
    int k, nfr;
    k = 0; nfr = 0;
    while (k < ev_words[l].size()) begin
      word_t w;
      case (m)
        MODE_RAW, MODE_FULLDIFF: for (int c = 0; c < 16; c++) begin
          w = ev_words[l][k++];
          val[l].push_back(int'(w[9:0]));
        end
        MODE_COMP2: for (int c = 0; c < 16; c += 2) begin
          w = ev_words[l][k++];
          val[l].push_back(sx(int'(w[15:8]), 8));
          val[l].push_back(sx(int'(w[7:0]), 8));
        end
        default: for (int g = 0; g < 4; g++) begin
          w = ev_words[l][k];
          if (w[15:12] == 4'b1000) begin
            for (int c = 0; c < 4; c++) begin
              w = ev_words[l][k++];
              val[l].push_back(int'(w[9:0]));
            end
          end else begin
            for (int j = 0; j < 4; j++) val[l].push_back(sx(int'(w[15-4*j -: 4]), 4));
            k++;
          end
        end
      endcase
      nfr++;
    end
    return nfr;
  endfunction

  function automatic void decode_event(int e);
    comp_mode_e m;
    int tt, nfr [2], best_ok;
    bit is_raw;
    if (e >= tr_frame.size()) begin
      check("event without trigger", 0, 1);
      return;
    end
    tt = tr_frame[e];
    m  = fmode[tt];
    n_mode[m]++;
    is_raw = (m == MODE_RAW);
    for (int l = 0; l < 2; l++) begin
      val[l].delete();
      nfr[l] = parse_lane(l, m);
    end
    check("lanes hold the same t-samples", nfr[0], nfr[1]);
    best_ok = 0;
    for (int cand = tt - 2; cand <= tt + 2 && !best_ok; cand++) begin
      int ok, t0;
      ok = 1;
      t0 = cand - nfr[0] + 1;
      if (t0 < 0) continue;
      for (int l = 0; l < 2 && ok; l++)
        for (int f = 0; f < nfr[0] && ok; f++)
          for (int c = 0; c < 16; c++) begin
            int t, s, prev, v, got;
            t = t0 + f; s = smp[t][16 * l + c];
            prev = (t == 0) ? 0 : smp[t - 1][16 * l + c];
            v = val[l][16 * f + c];
            got = is_raw ? v : (prev + v + 2048) % 1024;
            if (got != s) begin ok = 0; break; end
          end
      best_ok = ok;
    end
    check("event decodes to the generated samples", best_ok, 1);
    if (best_ok) checks += 32 * nfr[0];   // samples compared
    if (tr_gto[e]) n_gto_evt++; else n_ext_evt++;
    if (tr_gto[e] && tr_pol[e]) n_pol_evt++;
    if (nfr[0] == 4096) n_full++;
    else if (nfr[0] != 64) n_partial++;
    $display("event %0d: trigger at t-sample %0d, %s, mode %0d, %0d t-samples, %0d+%0d words",
             e, tt, tr_gto[e] ? "GTO" : "external", int'(m), nfr[0],
             ev_words[0].size(), ev_words[1].size());
  endfunction

  task automatic wait_daq_idle();
    while (n_events < tr_frame.size()) run_frames(1);
  endtask

  always @(posedge clk) if (!rst) for (int i = 0; i < 32; i++) if (peak[i]) n_stretch++;

  initial begin
    int ev_before;
    data_in[0] = '0; data_in[1] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    wr(2'b00, REG_THRESHOLD, 8'd6);
    wr(2'b00, REG_STRETCH, 8'd1);
    @(negedge clk); csb = 2'b10; rwb = 1; addr = REG_THRESHOLD; #1;
    check("threshold read-back", int'(rdata), 6);
    csb = 2'b11;

    // 1: full-size event from a track, compression 4
    run_frames(300);
    trig_src = TRIG_GTO;
    trk_t0.push_back(4150); trk_w0.push_back(4); trk_w1.push_back(23); trk_amp.push_back(22);
    run_frames(4200 - 300);
    wait_daq_idle();
    check("event 1 taken", tr_frame.size(), 1);

    // 2: shorter buffers; freeze the partly filled buffer with the external trigger
    meb_len_sel = 3'd0;
    trig_src = TRIG_EXTERNAL;
    run_frames(200, 100);
    wait_daq_idle();

    // 3, 4: raw and full difference with external triggers
    comp_mode = MODE_RAW;
    run_frames(200, 150);
    wait_daq_idle();
    comp_mode = MODE_FULLDIFF;
    run_frames(200, 150);
    wait_daq_idle();

    // 5: compression 2, GTO from a track
    comp_mode = MODE_COMP2;
    trig_src = TRIG_GTO;
    trk_t0.push_back(frame + 150); trk_w0.push_back(8); trk_w1.push_back(27); trk_amp.push_back(20);
    run_frames(400);
    wait_daq_idle();

    // 6: polarity 1, negative-going track, compression 4
    comp_mode = MODE_COMP4;
    run_frames(200, -1, 10);
    ev_before = tr_frame.size();
    trk_t0.push_back(frame + 150); trk_w0.push_back(2); trk_w1.push_back(29); trk_amp.push_back(-25);
    run_frames(400);
    wait_daq_idle();
    check("negative track triggered with polarity 1", tr_frame.size(), ev_before + 1);

    // 7: DAQ stall, four triggers, one lost
    trig_src = TRIG_EXTERNAL;
    daq_hold = 1;
    ev_before = tr_frame.size();
    for (int i = 0; i < 4; i++) run_frames(100, 50);
    check("triggers taken during the stall", tr_frame.size(), ev_before + 3);
    daq_hold = 0;
    wait_daq_idle();
    run_frames(20);

    check("sync errors", int'(sync_err), 0);
    check("events read = triggers taken", n_events, tr_frame.size());
    check("GTO events seen", int'(n_gto_evt >= 3), 1);
    check("external-trigger events seen", int'(n_ext_evt >= 5), 1);
    check("compression-4 overflows seen", int'(n_ovf > 0), 1);
    check("raw event seen", int'(n_mode[MODE_RAW] > 0), 1);
    check("compression-4 event seen", int'(n_mode[MODE_COMP4] > 0), 1);
    check("full-difference event seen", int'(n_mode[MODE_FULLDIFF] > 0), 1);
    check("compression-2 event seen", int'(n_mode[MODE_COMP2] > 0), 1);
    check("polarity-1 GTO event seen", int'(n_pol_evt > 0), 1);
    check("lost triggers", n_lost, 1);
    check("DAQ back-pressure seen", int'(n_bp > 0), 1);
    check("full 4096-sample event", n_full, 1);
    check("partly filled buffer seen", int'(n_partial > 0), 1);
    check("stretched PEAKs seen", int'(n_stretch > 0), 1);
    $display("events=%0d gto_events=%0d ext_events=%0d overflows=%0d lost=%0d backpressure=%0d",
             n_events, n_gto_evt, n_ext_evt, n_ovf, n_lost, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
