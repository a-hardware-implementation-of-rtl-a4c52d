// sd_demux: 1:16 demultiplexer of the SuperDaedalus chip.
//
// Takes the 10-bit time-multiplexed sample stream and the channel index from
// the control logic, and hands each sample to the rebinning unit of its
// channel: one register holds the sample, and a one-hot strobe valid[ch]
// tells channel ch to take it.  Each channel is therefore strobed once per
// t-sample (every 16 clocks).
//
// Interface: data_in/chan/en from the stream; sample and valid[NCH-1:0] to
// the rebinning units.  Timing: one clock of latency (registered outputs).
// That the demux is a single shared register plus strobes, rather than
// 16 separate registers, is this design's choice.
module sd_demux
  import sd_pkg::*;
#(
  parameter int unsigned NCH = NCH_CHIP
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   en,
  input  logic [$clog2(NCH)-1:0] chan,
  input  sample_t                data_in,
  output sample_t                sample,
  output logic [NCH-1:0]         valid
);
  always_ff @(posedge clk) begin
    if (rst) begin
      sample <= '0;
      valid  <= '0;
    end else begin
      sample <= data_in;
      valid  <= '0;
      if (en) valid[chan] <= 1'b1;
    end
  end
endmodule
