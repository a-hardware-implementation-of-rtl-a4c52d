// board_trigger: majority trigger of the 32-channel digital board.
//
// The 32 stretched PEAK lines of a board are split into two groups of 16
// wires (one per SuperDaedalus chip).  For each group the number of PEAKs that
// are high is counted and compared with the programmable majority M; the
// logical OR of the two group decisions is the board's Global Trigger Output
// (GTO).  Requiring M wires within 16 (about 5 cm) cuts fake triggers from
// noise while keeping short tracks visible.
//
// The trigger that freezes the event buffers is taken from the external
// trigger input, from GTO, or from either (trig_src).  A trigger pulse of one
// clock is produced on the rising edge of the selected condition, so a long
// GTO freezes one event only.
//
// Interface: peak[31:0], majority (0..16), trig_src, ext_trig; outputs gto
// (level), trigger (pulse), and the two group counts for monitoring.
// Timing: gto is registered, one clock after peak; trigger one clock after
// the selected level rises.
// From the paper: two groups of 16, majority, OR of the two, GTO, external
// trigger.  This design's choices: >= comparison with M, the source select and
// the edge detection.
module board_trigger
  import sd_pkg::*;
#(
  parameter int unsigned NGRP = 2,
  parameter int unsigned GRP  = NCH_CHIP
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [NGRP*GRP-1:0]   peak,
  input  logic [$clog2(GRP):0]  majority,
  input  trig_src_e             trig_src,
  input  logic                  ext_trig,
  output logic [$clog2(GRP):0]  grp_count [NGRP],
  output logic                  gto,
  output logic                  trigger
);
  localparam int unsigned MW = $clog2(GRP) + 1;

  logic [MW-1:0] cnt [NGRP];
  logic          gto_n, sel, sel_q;

  always_comb begin
    gto_n = 1'b0;
    for (int g = 0; g < NGRP; g++) begin
      cnt[g] = '0;
      for (int i = 0; i < GRP; i++) cnt[g] = cnt[g] + MW'(peak[g*GRP + i]);
      gto_n = gto_n | (cnt[g] >= majority);
    end
  end

  always_comb begin
    unique case (trig_src)
      TRIG_EXTERNAL: sel = ext_trig;
      TRIG_GTO:      sel = gto;
      TRIG_EITHER:   sel = ext_trig | gto;
      default:       sel = ext_trig;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gto     <= 1'b0;
      sel_q   <= 1'b0;
      trigger <= 1'b0;
      for (int g = 0; g < NGRP; g++) grp_count[g] <= '0;
    end else begin
      gto     <= gto_n;
      sel_q   <= sel;
      trigger <= sel & ~sel_q;
      for (int g = 0; g < NGRP; g++) grp_count[g] <= cnt[g];
    end
  end
endmodule
