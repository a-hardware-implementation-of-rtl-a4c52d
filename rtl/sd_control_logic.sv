// sd_control_logic: channel sequencer of the SuperDaedalus chip.
//
// The analog board multiplexes 16 wires onto one 10-bit stream, one sample per
// 40 MHz clock, so every channel is sampled once per 400 ns t-sample.  This
// block keeps a modulo-16 counter that tells which channel's sample is on
// DATA_IN in the current clock.  SYNC_IN, high for one clock together with the
// sample of channel 0, realigns the counter; samples arriving before the first
// SYNC_IN are marked invalid.  A SYNC_IN that arrives when the counter did not
// expect channel 0 raises sync_err for one clock.  CSB (active low) is turned
// into the chip-select of the parameter register.
//
// Interface: clk, rst (synchronous, active high), sync_in, csb.
// Timing: chan/sample_en are combinational from sync_in and the counter, i.e.
// they describe the sample present on DATA_IN in the same clock.
// The block names and pins follow the chip's block diagram; the sync
// convention and the counter are this design's choice.
module sd_control_logic
  import sd_pkg::*;
#(
  parameter int unsigned NCH = NCH_CHIP
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   sync_in,
  input  logic                   csb,
  output logic [$clog2(NCH)-1:0] chan,
  output logic                   sample_en,
  output logic                   cs,
  output logic                   sync_err
);
  localparam int unsigned CW = $clog2(NCH);

  logic [CW-1:0] cnt_q;
  logic          locked_q;

  always_comb begin
    chan      = sync_in ? '0 : cnt_q;
    sample_en = sync_in | locked_q;
    cs        = ~csb;
    sync_err  = sync_in & locked_q & (cnt_q != '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q    <= '0;
      locked_q <= 1'b0;
    end else begin
      locked_q <= locked_q | sync_in;
      cnt_q    <= (chan == CW'(NCH - 1)) ? '0 : chan + 1'b1;
    end
  end
endmodule
