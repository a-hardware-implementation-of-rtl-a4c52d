// sd_rebinning: double-rebinning sliding-window (DR-slw) hit finder for one wire.
//
// Every new t-sample Q(t0) of the wire updates two running sums:
//   sum_short += Q(t0) - Q(t0-8)     (8-sample window,   high-frequency noise)
//   sum_long  += Q(t0) - Q(t0-128)   (128-sample window, baseline drift)
// The averages are Qshort = sum_short/8 and Qlong = sum_long/128 (arithmetic
// shifts, truncating), and S = Qshort - Qlong.  With polarity = 1 the sign of
// S is inverted so that a falling edge (the undershoot of induction wires)
// triggers.  A sample "counts" when S >= Qthr; PEAK is high from the third
// consecutive counting t-sample on and drops at the first sample that does
// not count.
//
// The 128 previous samples live in a circular buffer (a memory with one write
// and two read ports: t0-128 at the write pointer, t0-8 eight entries behind
// it).  Until a window has been filled, the samples leaving it are taken as
// zero, so the averages ramp up from zero after reset.
//
// Interface: en strobes one new sample (once per t-sample); thr and polarity
// come from the parameter register.  q_short, q_long and s are exposed for
// monitoring.  Timing: peak, s, q_short, q_long are registered and change in
// the clock after the strobe.
// From the paper: the 8 / 128 windows, add-new/subtract-old update, the
// threshold comparison, the 3-sample persistence and the polarity parameter.
// This design's choices: truncating averages, zero-filled start-up, and the
// >= comparison (equation form) where the prose says "above".
module sd_rebinning
  import sd_pkg::*;
#(
  parameter int unsigned SHORT_LEN = 8,
  parameter int unsigned LONG_LEN  = 128,
  parameter int unsigned MIN_ABOVE = 3
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  sample_t              sample,
  input  logic [THR_W-1:0]     thr,
  input  logic                 polarity,
  output logic signed [SAMPLE_W+1:0] q_short,
  output logic signed [SAMPLE_W+1:0] q_long,
  output logic signed [SAMPLE_W+1:0] s,
  output logic                 peak
);
  localparam int unsigned SLOG = $clog2(SHORT_LEN);
  localparam int unsigned LLOG = $clog2(LONG_LEN);
  localparam int unsigned SW   = SAMPLE_W + SLOG + 1;   // short sum width (unsigned)
  localparam int unsigned LW   = SAMPLE_W + LLOG + 1;   // long sum width
  localparam int unsigned AW   = $clog2(MIN_ABOVE + 1);
  localparam int unsigned QW   = SAMPLE_W + 2;

  sample_t           hist [LONG_LEN];   // last LONG_LEN samples
  logic [LLOG-1:0]   wptr_q;
  logic [LLOG:0]     fill_q;            // number of samples seen, saturating at LONG_LEN
  logic [SW-1:0]     sum_s_q;
  logic [LW-1:0]     sum_l_q;
  logic [AW-1:0]     above_q;

  sample_t           old_short, old_long;
  logic [SW-1:0]     sum_s_n;
  logic [LW-1:0]     sum_l_n;
  logic signed [QW-1:0] qs_n, ql_n, s_n;
  logic              hit;
  logic [AW-1:0]     above_n;

  always_comb begin
    old_long  = (fill_q >= (LLOG+1)'(LONG_LEN))  ? hist[wptr_q] : '0;
    old_short = (fill_q >= (LLOG+1)'(SHORT_LEN)) ? hist[wptr_q - LLOG'(SHORT_LEN)] : '0;
    sum_s_n   = sum_s_q + SW'(sample) - SW'(old_short);
    sum_l_n   = sum_l_q + LW'(sample) - LW'(old_long);
    qs_n      = QW'(sum_s_n >> SLOG);
    ql_n      = QW'(sum_l_n >> LLOG);
    s_n       = polarity ? (ql_n - qs_n) : (qs_n - ql_n);
    hit       = (s_n >= $signed(QW'(thr)));
    above_n   = hit ? ((above_q == AW'(MIN_ABOVE)) ? above_q : above_q + 1'b1) : '0;
  end

  always_ff @(posedge clk) begin
    if (en) hist[wptr_q] <= sample;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr_q  <= '0;
      fill_q  <= '0;
      sum_s_q <= '0;
      sum_l_q <= '0;
      above_q <= '0;
      q_short <= '0;
      q_long  <= '0;
      s       <= '0;
      peak    <= 1'b0;
    end else if (en) begin
      wptr_q  <= wptr_q + 1'b1;
      if (fill_q != (LLOG+1)'(LONG_LEN)) fill_q <= fill_q + 1'b1;
      sum_s_q <= sum_s_n;
      sum_l_q <= sum_l_n;
      above_q <= above_n;
      q_short <= qs_n;
      q_long  <= ql_n;
      s       <= s_n;
      peak    <= (above_n == AW'(MIN_ABOVE));
    end
  end
endmodule
