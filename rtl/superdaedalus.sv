// superdaedalus: 16-channel hit-finding chip of the digital read-out board.
//
// The chip receives the 10-bit samples of 16 wires, multiplexed one channel
// per 40 MHz clock (a t-sample of 400 ns per channel), and produces one PEAK
// line per wire.  Inside, as in the chip's block diagram:
//   control logic  - channel counter aligned by SYNC_IN, chip select from CSB
//   DEMUX 1:16     - hands each sample to its channel
//   16 x rebinning - DR-slw hit finder per wire (8/128-sample sliding averages,
//                    threshold, 3-sample persistence, polarity)
//   trigger logic  - stretches every PEAK by 25/50/75/125 us
//   parameters     - threshold, polarity, stretch select, written over
//                    RWB/STROBE/ADDR/THRS
//
// Interface: clk, rst, csb, sync_in, data_in (the sample of the channel given
// by the sync), the parameter bus, peak[15:0] (stretched) and peak_raw[15:0]
// (unstretched, for monitoring).  Timing: a sample on data_in reaches its
// rebinning unit one clock later; peak_raw follows one clock after that and
// peak one further clock later.
module superdaedalus
  import sd_pkg::*;
#(
  parameter int unsigned NCH       = NCH_CHIP,
  parameter int unsigned SHORT_LEN = 8,
  parameter int unsigned LONG_LEN  = 128,
  parameter int unsigned MIN_ABOVE = 3
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             csb,
  input  logic             sync_in,
  input  sample_t          data_in,
  input  logic             rwb,
  input  logic             strobe,
  input  logic [1:0]       addr,
  input  logic [THR_W-1:0] thrs,
  output logic [THR_W-1:0] rdata,
  output logic             sync_err,
  output logic [NCH-1:0]   peak_raw,
  output logic [NCH-1:0]   peak
);
  localparam int unsigned CW = $clog2(NCH);

  logic [CW-1:0]    chan;
  logic             sample_en, cs;
  sample_t          dm_sample;
  logic [NCH-1:0]   dm_valid;
  logic [THR_W-1:0] threshold;
  logic             polarity;
  logic [1:0]       stretch_sel;

  sd_control_logic #(.NCH(NCH)) u_ctrl (
    .clk, .rst, .sync_in, .csb, .chan, .sample_en, .cs, .sync_err
  );

  sd_param_regs u_regs (
    .clk, .rst, .cs, .strobe, .rwb, .addr, .thrs, .rdata,
    .threshold, .polarity, .stretch_sel
  );

  sd_demux #(.NCH(NCH)) u_demux (
    .clk, .rst, .en(sample_en), .chan, .data_in,
    .sample(dm_sample), .valid(dm_valid)
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic signed [SAMPLE_W+1:0] q_short, q_long, s;
    sd_rebinning #(
      .SHORT_LEN(SHORT_LEN), .LONG_LEN(LONG_LEN), .MIN_ABOVE(MIN_ABOVE)
    ) u_rebin (
      .clk, .rst, .en(dm_valid[c]), .sample(dm_sample),
      .thr(threshold), .polarity,
      .q_short, .q_long, .s, .peak(peak_raw[c])
    );
  end

  sd_trigger_logic #(.NCH(NCH)) u_trig (
    .clk, .rst, .peak_in(peak_raw), .stretch_sel, .peak_out(peak)
  );
endmodule
