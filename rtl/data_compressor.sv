// data_compressor: formats one 16-channel sample stream into 16-bit buffer words.
//
// Samples arrive one channel per clock (channel index in_chan, 0..15).  For
// each channel the previous t-sample is kept, and the difference
// d = Q(t) - Q(t-1) is formed.  Four formats, chosen by mode:
//   RAW       one word per sample: {DAEDALUS field[5:0], sample[9:0]}
//   COMP4     per group of 4 consecutive channels: if every |d| <= 7, one word
//             {d(N)[3:0], d(N+1)[3:0], d(N+2)[3:0], d(N+3)[3:0]} (channel N in
//             bits 15:12); otherwise (overflow) four words
//             {6'b100000, d[9:0]}, one per channel.  The nibble pattern 1000
//             (-8) can never be a compressed difference, so it marks overflow.
//   FULLDIFF  one word {6'b100000, d[9:0]} per sample, as COMP4 in overflow
//   COMP2     per pair of channels one word {d(N)[7:0], d(N+1)[7:0]}
// The 10-bit difference is taken modulo 1024, which is lossless: adding it to
// the previous sample modulo 1024 restores the sample.  The 8-bit difference of
// COMP2 is lossless only while |d| <= 127, which the paper states holds for
// physical signals.  The previous samples start at zero after reset.
//
// A COMP4 overflow produces four words at once; they pass through an 8-entry
// FIFO that drains one word per clock, so the output never exceeds one word
// per clock and never needs back-pressure.  out_first marks the first word of
// each t-sample.  The mode is latched at channel 0 so a t-sample is never
// formatted in two modes.  overflow pulses once per COMP4 overflow group.
//
// Timing: a word is pushed in the clock its last sample arrives and leaves
// the FIFO at the earliest one clock later.
// From the paper: the four formats and their bit layouts, the +-7 overflow
// rule and the 1000 flag.  This design's choices: two's-complement
// differences, zero initial reference, the FIFO, the contents of the DAEDALUS
// field (supplied by the caller as in_tag).
module data_compressor
  import sd_pkg::*;
#(
  parameter int unsigned NCH = NCH_CHIP
) (
  input  logic                   clk,
  input  logic                   rst,
  input  comp_mode_e             mode,
  input  logic                   in_valid,
  input  logic [$clog2(NCH)-1:0] in_chan,
  input  sample_t                in_sample,
  input  logic [5:0]             in_tag,
  output logic                   out_valid,
  output word_t                  out_word,
  output logic                   out_first,
  output logic                   overflow
);
  localparam int unsigned CW    = $clog2(NCH);
  localparam int unsigned DEPTH = 8;
  typedef logic signed [SAMPLE_W:0] diff_t;   // 11-bit signed difference

  sample_t       prev_q [NCH];
  diff_t         grp_q  [3];                  // differences of the group so far
  logic          grp_small_q;
  comp_mode_e    mode_q, cur_mode;

  diff_t         d;
  logic          is_small;
  logic [2:0]    npush;
  word_t         pw   [4];
  logic          pfirst;

  // FIFO
  word_t         fifo_w [DEPTH];
  logic          fifo_f [DEPTH];
  logic [2:0]    wp_q, rp_q;
  logic [3:0]    cnt_q;

  always_comb begin
    cur_mode = (in_chan == '0) ? mode : mode_q;
    d        = $signed({1'b0, in_sample}) - $signed({1'b0, prev_q[in_chan]});
    is_small    = (d >= -diff_t'(COMP4_MAX)) && (d <= diff_t'(COMP4_MAX));
    npush    = '0;
    pfirst   = 1'b0;
    for (int i = 0; i < 4; i++) pw[i] = '0;
    if (in_valid) begin
      unique case (cur_mode)
        MODE_RAW: begin
          npush  = 3'd1;
          pw[0]  = {in_tag, in_sample};
          pfirst = (in_chan == '0);
        end
        MODE_FULLDIFF: begin
          npush  = 3'd1;
          pw[0]  = {DIFF_FLAG, d[SAMPLE_W-1:0]};
          pfirst = (in_chan == '0);
        end
        MODE_COMP2: begin
          if (in_chan[0]) begin
            npush  = 3'd1;
            pw[0]  = {grp_q[{in_chan[1], 1'b0}][7:0], d[7:0]};
            pfirst = (in_chan == CW'(1));
          end
        end
        MODE_COMP4: begin
          if (in_chan[1:0] == 2'd3) begin
            pfirst = (in_chan == CW'(3));
            if (grp_small_q && is_small) begin
              npush = 3'd1;
              pw[0] = {grp_q[0][3:0], grp_q[1][3:0], grp_q[2][3:0], d[3:0]};
            end else begin
              npush = 3'd4;
              pw[0] = {DIFF_FLAG, grp_q[0][SAMPLE_W-1:0]};
              pw[1] = {DIFF_FLAG, grp_q[1][SAMPLE_W-1:0]};
              pw[2] = {DIFF_FLAG, grp_q[2][SAMPLE_W-1:0]};
              pw[3] = {DIFF_FLAG, d[SAMPLE_W-1:0]};
            end
          end
        end
        default: ;
      endcase
    end
  end

  assign overflow  = in_valid && (cur_mode == MODE_COMP4) && (in_chan[1:0] == 2'd3) && (npush == 3'd4);
  assign out_valid = (cnt_q != '0);
  assign out_word  = fifo_w[rp_q];
  assign out_first = fifo_f[rp_q];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NCH; i++) prev_q[i] <= '0;
      for (int i = 0; i < 3; i++)   grp_q[i]  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        fifo_w[i] <= '0;
        fifo_f[i] <= 1'b0;
      end
      grp_small_q <= 1'b1;
      mode_q      <= MODE_RAW;
      wp_q        <= '0;
      rp_q        <= '0;
      cnt_q       <= '0;
    end else begin
      if (in_valid) begin
        prev_q[in_chan] <= in_sample;
        if (in_chan == '0) mode_q <= mode;
        if (in_chan[1:0] != 2'd3) grp_q[in_chan[1:0]] <= d;
        grp_small_q <= (in_chan[1:0] == 2'd3) ? 1'b1
                     : (((in_chan[1:0] == 2'd0) ? 1'b1 : grp_small_q) && is_small);
      end
      for (int i = 0; i < 4; i++) begin
        if (3'(i) < npush) begin
          fifo_w[wp_q + 3'(i)] <= pw[i];
          fifo_f[wp_q + 3'(i)] <= pfirst && (i == 0);
        end
      end
      wp_q  <= wp_q + npush;
      rp_q  <= rp_q + 3'(out_valid);
      cnt_q <= cnt_q + 4'(npush) - 4'(out_valid);
    end
  end

  // The FIFO never overflows: at most 4 words are pushed per group of 4 clocks.
  assert property (@(posedge clk) disable iff (rst) (cnt_q + 4'(npush) - 4'(out_valid)) <= 4'(DEPTH))
    else $error("data_compressor: FIFO overflow");
endmodule
