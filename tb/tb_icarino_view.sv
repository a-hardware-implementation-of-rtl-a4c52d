// tb_icarino_view: trigger configurations of a 96-wire view read by three
// 32-channel boards.
//
// Three boards (wires 0..31, 32..63, 64..95) receive generated wire signals:
// baselines with +-2 counts of noise and deposits of 25 t-samples.  The
// trigger combinations of the view are formed here from the three GTO outputs,
// as they are built outside the boards:
//   muon trigger        GTO(first board) and GTO(third board)
//   low-energy trigger  GTO(central board) and not (GTO(first) and GTO(third))
// Scenarios (each after a reset, register set-up and 300 quiet t-samples):
//   A  collection view, Qthr 6, stretch 50 us, M = 8, 12, 15: a track parallel
//      to the wire planes (all 96 wires at once) must fire all three GTOs and
//      the muon trigger, and must not fire the low-energy trigger;
//   B  the same with an inclined track (5 t-samples later on each next wire,
//      about 45 degrees) and M = 15;
//   C  Qthr 6, M = 4: a deposit on 6 wires of the central board must fire the
//      low-energy trigger and not the muon trigger;
//   D  Qthr 5, M = 3: a deposit on 4 wires of the central board, same checks;
//   E  induction view, polarity 1, Qthr 5, M = 6: a bipolar signal (positive
//      lobe, then a deeper negative undershoot) on all wires must fire the
//      three GTOs;
//   F  noise only for 4096 t-samples at Qthr 6, M = 8: no GTO at all.
module tb_icarino_view;
  import sd_pkg::*;
  localparam int NB = 3;

  logic clk = 0, rst = 1, sync_in = 0;
  sample_t data_in [NB][2];
  logic [1:0] csb [NB];
  logic rwb = 1, strobe = 0;
  logic [1:0] addr = 0;
  logic [7:0] thrs = 0;
  logic [7:0] rdata [NB];
  logic [4:0] majority = 5'd8;
  logic [31:0] peak [NB];
  logic gto [NB], trigger [NB], trig_lost [NB], sync_err [NB];
  logic overflow [NB][2];
  logic [2:0] events_pending [NB];
  logic daq_valid [NB], daq_lane [NB], daq_last [NB];
  word_t daq_data [NB];

  for (genvar b = 0; b < NB; b++) begin : g_board
    arianna_board u_board (
      .clk, .rst, .sync_in, .data_in(data_in[b]), .csb(csb[b]), .rwb, .strobe, .addr, .thrs,
      .rdata(rdata[b]), .comp_mode(MODE_COMP4), .meb_len_sel(3'd4), .majority,
      .trig_src(TRIG_GTO), .ext_trig(1'b0), .peak(peak[b]), .gto(gto[b]), .trigger(trigger[b]),
      .trig_lost(trig_lost[b]), .overflow(overflow[b]), .sync_err(sync_err[b]),
      .events_pending(events_pending[b]), .daq_valid(daq_valid[b]), .daq_data(daq_data[b]),
      .daq_lane(daq_lane[b]), .daq_last(daq_last[b]), .daq_ready(1'b1));
  end

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    #60000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic void check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endfunction

  // deposits: start t-sample, first and last wire, delay per wire, amplitude, bipolar
  int dp_t0 [$], dp_w0 [$], dp_w1 [$], dp_dt [$], dp_amp [$], dp_bip [$];
  int t_now = 0;

  function automatic int gen(int t, int w);
    int v;
    v = 200 + 3 * w + int'($urandom % 5) - 2;
    foreach (dp_t0[i]) begin
      int ts;
      ts = dp_t0[i] + dp_dt[i] * (w - dp_w0[i]);
      if (w >= dp_w0[i] && w <= dp_w1[i] && t >= ts && t < ts + 25) begin
        if (!dp_bip[i]) v += dp_amp[i];
        else v += (t < ts + 10) ? dp_amp[i] / 2 : -dp_amp[i];
      end
    end
    return v;
  endfunction

  // what fired in the current window
  bit seen_gto [NB], seen_mu, seen_le;
  always @(posedge clk) if (!rst) begin
    for (int b = 0; b < NB; b++) if (gto[b]) seen_gto[b] = 1;
    if (gto[0] && gto[2]) seen_mu = 1;
    if (gto[1] && !(gto[0] && gto[2])) seen_le = 1;
  end
  function automatic void clear_seen();
    for (int b = 0; b < NB; b++) seen_gto[b] = 0;
    seen_mu = 0; seen_le = 0;
  endfunction

  task automatic stream(int n);
    for (int i = 0; i < n; i++) begin
      int s [96];
      for (int w = 0; w < 96; w++) s[w] = gen(t_now, w);
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        sync_in = (c == 0);
        for (int b = 0; b < NB; b++) begin
          data_in[b][0] = sample_t'(s[32 * b + c]);
          data_in[b][1] = sample_t'(s[32 * b + 16 + c]);
        end
      end
      t_now++;
    end
  endtask

  task automatic setup(int thr, int pol, int str, int m);
    @(negedge clk); rst = 1; sync_in = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    dp_t0.delete(); dp_w0.delete(); dp_w1.delete(); dp_dt.delete(); dp_amp.delete(); dp_bip.delete();
    foreach (csb[b]) csb[b] = 2'b00;
    rwb = 0; strobe = 1;
    addr = REG_THRESHOLD; thrs = 8'(thr); @(negedge clk);
    addr = REG_POLARITY;  thrs = 8'(pol); @(negedge clk);
    addr = REG_STRETCH;   thrs = 8'(str); @(negedge clk);
    strobe = 0; rwb = 1;
    foreach (csb[b]) csb[b] = 2'b11;
    majority = 5'(m);
    t_now = 0;
    stream(300);          // start-up ramp of the long average, then quiet
    clear_seen();
  endtask

  task automatic deposit(int w0, int w1, int dt, int amp, int bip, int run);
    dp_t0.push_back(t_now + 20); dp_w0.push_back(w0); dp_w1.push_back(w1);
    dp_dt.push_back(dt); dp_amp.push_back(amp); dp_bip.push_back(bip);
    stream(run);
  endtask

  int mj [3] = '{8, 12, 15};

  initial begin
    for (int b = 0; b < NB; b++) begin data_in[b][0] = '0; data_in[b][1] = '0; csb[b] = 2'b11; end
    // A: parallel track, M = 8, 12, 15
    foreach (mj[i]) begin
      setup(6, 0, 1, mj[i]);
      deposit(0, 95, 0, 20, 0, 200);
      for (int b = 0; b < NB; b++) check($sformatf("A M=%0d GTO board %0d", mj[i], b), int'(seen_gto[b]), 1);
      check($sformatf("A M=%0d muon trigger", mj[i]), int'(seen_mu), 1);
      check($sformatf("A M=%0d no low-energy trigger", mj[i]), int'(seen_le), 0);
    end
    // B: inclined track, M = 15, 50 us stretch
    setup(6, 0, 1, 15);
    deposit(0, 95, 5, 20, 0, 700);
    for (int b = 0; b < NB; b++) check($sformatf("B GTO board %0d", b), int'(seen_gto[b]), 1);
    // C: isolated deposit in the central board, Qthr 6, M = 4
    setup(6, 0, 1, 4);
    deposit(44, 49, 1, 15, 0, 200);
    check("C low-energy trigger", int'(seen_le), 1);
    check("C no muon trigger", int'(seen_mu), 0);
    check("C lateral boards quiet", int'(seen_gto[0] || seen_gto[2]), 0);
    // D: Qthr 5, M = 3
    setup(5, 0, 0, 3);
    deposit(40, 43, 0, 12, 0, 200);
    check("D low-energy trigger", int'(seen_le), 1);
    check("D no muon trigger", int'(seen_mu), 0);
    // E: induction view, falling polarity
    setup(5, 1, 1, 6);
    deposit(0, 95, 0, 16, 1, 200);
    for (int b = 0; b < NB; b++) check($sformatf("E GTO board %0d", b), int'(seen_gto[b]), 1);
    // F: noise only
    setup(6, 0, 1, 8);
    stream(4096);
    for (int b = 0; b < NB; b++) check($sformatf("F no fake GTO board %0d", b), int'(seen_gto[b]), 0);
    for (int b = 0; b < NB; b++) check("sync", int'(sync_err[b]), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
