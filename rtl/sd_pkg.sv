// sd_pkg: types and constants shared by the SuperDaedalus hit-finding chip and
// the 32-channel digital read-out board around it.
//
// Fixed by the design: 10-bit ADC samples, 16 channels multiplexed on one
// 10-bit stream, 16-bit buffer words, the four buffer formats (raw,
// compression 4, full difference, compression 2), the seven buffer lengths
// (64..4096 t-samples, powers of two) and the four stretching lengths
// (25, 50, 75, 125 us).  The encodings of the mode and select fields and the
// register addresses are this design's own choice.
package sd_pkg;

  localparam int unsigned SAMPLE_W   = 10;  // ADC sample width
  localparam int unsigned NCH_CHIP   = 16;  // channels per SuperDaedalus / per serial stream
  localparam int unsigned NCH_BOARD  = 32;  // channels per digital board
  localparam int unsigned WORD_W     = 16;  // buffer word width
  localparam int unsigned THR_W      = 8;   // threshold register width
  localparam int unsigned CLK_MHZ    = 40;  // sampling clock: one channel sample per clock

  typedef logic [SAMPLE_W-1:0] sample_t;
  typedef logic [WORD_W-1:0]   word_t;

  // Buffer formatting modes.
  typedef enum logic [1:0] {
    MODE_RAW      = 2'd0,  // {6-bit DAEDALUS field, 10-bit sample}
    MODE_COMP4    = 2'd1,  // four 4-bit differences per word, or overflow words
    MODE_FULLDIFF = 2'd2,  // {6'b100000, 10-bit difference} for every sample
    MODE_COMP2    = 2'd3   // two 8-bit differences per word
  } comp_mode_e;

  // Header of an overflow / full-difference word: "1000" in bits 15:12, then
  // "00" in bits 11:10 ("100000").
  localparam logic [5:0] DIFF_FLAG = 6'b100000;

  // Largest difference that fits a compression-4 nibble: |d| <= 7.
  localparam int COMP4_MAX = 7;

  // Stretching lengths in microseconds and in 40 MHz clock cycles.
  localparam int unsigned STRETCH_US [4] = '{25, 50, 75, 125};
  function automatic int unsigned stretch_cycles(input logic [1:0] sel);
    return STRETCH_US[sel] * CLK_MHZ;
  endfunction

  // Buffer length select: 0..6 -> 64 << sel t-samples.
  localparam int unsigned MEB_LEN_MIN_LOG2 = 6;
  localparam int unsigned MEB_LEN_SELS     = 7;

  // SuperDaedalus parameter register addresses.
  typedef enum logic [1:0] {
    REG_THRESHOLD = 2'd0,
    REG_POLARITY  = 2'd1,
    REG_STRETCH   = 2'd2
  } reg_addr_e;

  // Trigger source select on the board.
  typedef enum logic [1:0] {
    TRIG_EXTERNAL = 2'd0,
    TRIG_GTO      = 2'd1,
    TRIG_EITHER   = 2'd2
  } trig_src_e;

endpackage
