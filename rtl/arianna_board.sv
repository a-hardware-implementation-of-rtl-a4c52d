// arianna_board: 32-channel digital read-out board with on-line hit finding.
//
// The analog board sends two 10-bit sample streams (16 wires each, one
// channel per 40 MHz clock, so each wire is sampled every 400 ns) and a sync
// that marks channel 0.  On this board each stream feeds, in parallel:
//   - a SuperDaedalus chip, which finds hits on its 16 wires and outputs 16
//     stretched PEAK lines;
//   - a data compressor, which formats the stream into 16-bit words (raw,
//     compression 4, full difference or compression 2);
//   - a multi-event buffer (MEB) lane, which records the words continuously.
// The board trigger logic forms the majority of the PEAKs in each group of 16
// and ORs the two into the Global Trigger Output (GTO).  GTO and/or an
// external trigger freeze the active buffer of both lanes; writing moves to the
// next buffer, and the frozen event is read out to the DAQ port, lane 0 then
// lane 1, after which the buffers are released.
//
// A trigger is taken only if both lanes have a free buffer, so the two lanes
// always hold the same events; otherwise trig_lost pulses.
// Ports: the two streams and sync (the 21-bit link: 2 x 10 data + sync, an
// interpretation of this design), the chips' parameter bus with one chip
// select per chip, board settings (compression mode, buffer length, majority,
// trigger source), the external trigger, PEAK/GTO monitor outputs and the DAQ
// readout stream with valid/ready.
module arianna_board
  import sd_pkg::*;
#(
  parameter int unsigned NBUF      = 4,
  parameter int unsigned LEN_MAX   = 4096,
  parameter int unsigned LONG_LEN  = 128,
  parameter int unsigned SHORT_LEN = 8
) (
  input  logic             clk,
  input  logic             rst,
  // serial link from the analog board
  input  logic             sync_in,
  input  sample_t          data_in [2],
  // SuperDaedalus parameter bus
  input  logic [1:0]       csb,
  input  logic             rwb,
  input  logic             strobe,
  input  logic [1:0]       addr,
  input  logic [THR_W-1:0] thrs,
  output logic [THR_W-1:0] rdata,
  // board settings
  input  comp_mode_e       comp_mode,
  input  logic [2:0]       meb_len_sel,
  input  logic [4:0]       majority,
  input  trig_src_e        trig_src,
  input  logic             ext_trig,
  // monitoring
  output logic [NCH_BOARD-1:0] peak,
  output logic             gto,
  output logic             trigger,
  output logic             trig_lost,
  output logic             overflow [2],
  output logic             sync_err,
  output logic [$clog2(NBUF):0] events_pending,
  // DAQ readout
  output logic             daq_valid,
  output word_t            daq_data,
  output logic             daq_lane,
  output logic             daq_last,
  input  logic             daq_ready
);
  logic [3:0]   chan;
  logic         sample_en, cs_unused, board_sync_err;
  logic [THR_W-1:0] chip_rdata [2];
  logic         chip_sync_err [2];
  logic [NCH_CHIP-1:0] peak_raw [2];
  logic         cw_valid [2], cw_first [2];
  word_t        cw_word [2];
  logic         free_avail [2], lane_lost [2];
  logic [$clog2(NBUF):0] frozen_cnt [2];
  logic         rd_valid [2], rd_last [2], rd_ready [2];
  word_t        rd_data [2];
  logic [4:0]   grp_count [2];
  logic         take_trig;

  // Channel sequencer for the board side of the link (same convention as in
  // the chips).
  sd_control_logic u_ctrl (
    .clk, .rst, .sync_in, .csb(1'b1), .chan, .sample_en, .cs(cs_unused),
    .sync_err(board_sync_err)
  );

  for (genvar l = 0; l < 2; l++) begin : g_lane
    superdaedalus #(.SHORT_LEN(SHORT_LEN), .LONG_LEN(LONG_LEN)) u_sd (
      .clk, .rst, .csb(csb[l]), .sync_in, .data_in(data_in[l]),
      .rwb, .strobe, .addr, .thrs, .rdata(chip_rdata[l]),
      .sync_err(chip_sync_err[l]), .peak_raw(peak_raw[l]),
      .peak(peak[l*NCH_CHIP +: NCH_CHIP])
    );

    data_compressor u_comp (
      .clk, .rst, .mode(comp_mode), .in_valid(sample_en), .in_chan(chan),
      .in_sample(data_in[l]), .in_tag({5'b0, peak[l*NCH_CHIP + int'(chan)]}),
      .out_valid(cw_valid[l]), .out_word(cw_word[l]), .out_first(cw_first[l]),
      .overflow(overflow[l])
    );

    meb #(.NBUF(NBUF), .LEN_MAX(LEN_MAX)) u_meb (
      .clk, .rst, .len_sel(meb_len_sel),
      .wr_valid(cw_valid[l]), .wr_word(cw_word[l]), .wr_first(cw_first[l]),
      .trigger(take_trig), .free_avail(free_avail[l]), .trig_lost(lane_lost[l]),
      .frozen_cnt(frozen_cnt[l]),
      .rd_valid(rd_valid[l]), .rd_data(rd_data[l]), .rd_last(rd_last[l]),
      .rd_ready(rd_ready[l])
    );
  end

  assign events_pending = frozen_cnt[0];
  assign rdata    = chip_rdata[0] | chip_rdata[1];
  assign sync_err = board_sync_err | chip_sync_err[0] | chip_sync_err[1];

  board_trigger u_trig (
    .clk, .rst, .peak, .majority, .trig_src, .ext_trig,
    .grp_count, .gto, .trigger
  );

  assign take_trig = trigger && free_avail[0] && free_avail[1];
  assign trig_lost = trigger && !take_trig;

  readout_mux u_rdmux (
    .clk, .rst, .rd_valid, .rd_data, .rd_last, .rd_ready,
    .daq_valid, .daq_data, .daq_lane, .daq_last, .daq_ready
  );
endmodule
