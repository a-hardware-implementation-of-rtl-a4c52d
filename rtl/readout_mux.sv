// readout_mux: merges the two lanes' buffer readouts into one DAQ stream.
//
// Both lanes freeze the same event at the same time, so frozen buffers come in
// pairs.  The merger forwards lane 0's buffer until its last word, then lane
// 1's buffer, and marks the last word of lane 1 as the end of the event
// (daq_last).  The lane number of the current word is given on daq_lane.
// Back-pressure from the DAQ (daq_ready) is passed to the lane being read.
//
// Timing: combinational path from the lanes to the DAQ port; the lane
// pointer changes after a lane's last word is taken.  The order lane 0 then
// lane 1 and the event marker are this design's choice.
module readout_mux
  import sd_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  rd_valid [2],
  input  word_t rd_data  [2],
  input  logic  rd_last  [2],
  output logic  rd_ready [2],
  output logic  daq_valid,
  output word_t daq_data,
  output logic  daq_lane,
  output logic  daq_last,
  input  logic  daq_ready
);
  logic lane_q;

  always_comb begin
    daq_valid   = rd_valid[lane_q];
    daq_data    = rd_data[lane_q];
    daq_lane    = lane_q;
    daq_last    = rd_last[lane_q] && lane_q;
    rd_ready[0] = daq_ready && !lane_q;
    rd_ready[1] = daq_ready && lane_q;
  end

  always_ff @(posedge clk) begin
    if (rst)                                         lane_q <= 1'b0;
    else if (daq_valid && daq_ready && rd_last[lane_q]) lane_q <= ~lane_q;
  end
endmodule
