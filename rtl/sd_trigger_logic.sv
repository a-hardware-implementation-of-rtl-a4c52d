// sd_trigger_logic: PEAK stretching stage of the SuperDaedalus chip.
//
// Wires hit by an inclined track peak at different times, so a majority of
// coincident PEAKs would miss them.  This final stage lengthens each channel's
// PEAK: while the PEAK of a channel is high its counter is loaded with the
// stretch length, afterwards it counts down, and the stretched output is high
// while the counter is non-zero.  The output therefore rises one clock after
// PEAK and falls LEN clocks after the last clock in which PEAK was high.
// LEN is one of four values, 25, 50, 75 or 125 us, counted in 40 MHz clocks
// (1000, 2000, 3000, 5000), selected by stretch_sel.
//
// Interface: peak_in[NCH-1:0] from the rebinning units, stretch_sel from the
// parameter register, peak_out[NCH-1:0] is the chip's PEAK<15:0> output.
// From the paper: stretching of each PEAK among four lengths.  This design's
// choices: retriggerable counter, measurement from the falling edge, the
// second length read as 50 us (the text lists "25, 25, 75, and 125").
module sd_trigger_logic
  import sd_pkg::*;
#(
  parameter int unsigned NCH = NCH_CHIP
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [NCH-1:0] peak_in,
  input  logic [1:0]     stretch_sel,
  output logic [NCH-1:0] peak_out
);
  localparam int unsigned CNT_W = $clog2(STRETCH_US[3] * CLK_MHZ + 1);

  logic [CNT_W-1:0] len;
  logic [CNT_W-1:0] cnt_q [NCH];

  assign len = CNT_W'(stretch_cycles(stretch_sel));

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NCH; i++) cnt_q[i] <= '0;
    end else begin
      for (int i = 0; i < NCH; i++) begin
        if (peak_in[i])          cnt_q[i] <= len;
        else if (cnt_q[i] != '0) cnt_q[i] <= cnt_q[i] - 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NCH; i++) peak_out[i] = (cnt_q[i] != '0);
  end
endmodule
