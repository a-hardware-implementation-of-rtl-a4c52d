// sd_param_regs: parameter register of the SuperDaedalus chip.
//
// Holds the programmable settings of the hit finder: the threshold Qthr in ADC
// counts, the polarity (0 = trigger on rising signals, 1 = on falling ones, as
// used for induction wires) and the 2-bit stretching select.  The host writes
// a register by putting its address on ADDR and the value on THRS, with
// RWB = 0, STROBE = 1 and the chip selected, for one clock; with RWB = 1 the
// addressed register is driven on rdata instead.
//
// Register map (this design's choice): 0 threshold (8 bit), 1 polarity (bit 0),
// 2 stretch select (bits 1:0).  Reset values: threshold 6, the value chosen
// for running; polarity 0; stretch select 1 (50 us).
// Timing: writes take effect in the clock after the strobe; rdata is
// combinational.  Pin names are those of the chip's block diagram; the
// synchronous single-clock strobe and the read-back path are assumptions.
module sd_param_regs
  import sd_pkg::*;
#(
  parameter logic [THR_W-1:0] THR_RESET     = 8'd6,
  parameter logic             POL_RESET     = 1'b0,
  parameter logic [1:0]       STRETCH_RESET = 2'd1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             cs,
  input  logic             strobe,
  input  logic             rwb,
  input  logic [1:0]       addr,
  input  logic [THR_W-1:0] thrs,
  output logic [THR_W-1:0] rdata,
  output logic [THR_W-1:0] threshold,
  output logic             polarity,
  output logic [1:0]       stretch_sel
);
  logic wr;
  assign wr = cs & strobe & ~rwb;

  always_ff @(posedge clk) begin
    if (rst) begin
      threshold   <= THR_RESET;
      polarity    <= POL_RESET;
      stretch_sel <= STRETCH_RESET;
    end else if (wr) begin
      unique case (reg_addr_e'(addr))
        REG_THRESHOLD: threshold   <= thrs;
        REG_POLARITY:  polarity    <= thrs[0];
        REG_STRETCH:   stretch_sel <= thrs[1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    rdata = '0;
    if (cs && rwb) begin
      case (reg_addr_e'(addr))
        REG_THRESHOLD: rdata = threshold;
        REG_POLARITY:  rdata = THR_W'(polarity);
        REG_STRETCH:   rdata = THR_W'(stretch_sel);
        default:       rdata = '0;
      endcase
    end
  end
endmodule
