// tb_board_trigger: checks the majority and trigger selection.
// Random PEAK patterns with a chosen number of lines high in each group of 16
// are applied; one clock later GTO must equal (count0 >= M) | (count1 >= M),
// and the group counts must match.  The trigger output must pulse exactly on
// the rising edges of the selected source (external, GTO, or either).
module tb_board_trigger;
  import sd_pkg::*;
  logic clk = 0, rst = 1, ext_trig = 0;
  logic [31:0] peak = 0;
  logic [4:0] majority = 8;
  trig_src_e trig_src = TRIG_GTO;
  logic [4:0] grp_count [2];
  logic gto, trigger;
  int checks = 0, failures = 0, ngto = 0, ntrig = 0;

  board_trigger dut (.clk, .rst, .peak, .majority, .trig_src, .ext_trig, .grp_count, .gto, .trigger);

  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic logic [15:0] pattern(int n);
    logic [15:0] p;
    int placed;
    p = '0; placed = 0;
    while (placed < n) begin
      int i;
      i = $urandom % 16;
      if (!p[i]) begin p[i] = 1; placed++; end
    end
    return p;
  endfunction

  // Reference pipeline, updated on the same edges as the DUT from the
  // inputs it sees: gto is registered, the trigger is the registered rising
  // edge of the selected level.
  bit m_gto = 0, m_sel_q = 0, m_trig = 0;
  int m_c0 = 0, m_c1 = 0;
  always @(posedge clk) if (!rst) begin
    bit sel;
    int c0, c1;
    c0 = $countones(peak[15:0]); c1 = $countones(peak[31:16]);
    case (trig_src)
      TRIG_EXTERNAL: sel = ext_trig;
      TRIG_GTO:      sel = m_gto;
      default:       sel = ext_trig | m_gto;
    endcase
    m_trig  <= sel && !m_sel_q;
    m_sel_q <= sel;
    m_gto   <= (c0 >= int'(majority)) || (c1 >= int'(majority));
    m_c0 <= c0; m_c1 <= c1;
  end

  initial begin
    int c0, c1, mj[6];
    mj = '{3, 4, 6, 8, 12, 15};
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      if (it > 0) begin
        check("gto", int'(gto), int'(m_gto));
        check("count0", int'(grp_count[0]), m_c0);
        check("count1", int'(grp_count[1]), m_c1);
        check("trigger", int'(trigger), int'(m_trig));
        if (gto) ngto++;
        if (trigger) ntrig++;
      end
      if (it % 500 == 0) majority = 5'(mj[(it / 500) % 6]);
      trig_src = trig_src_e'((it / 2000) % 3);
      if (($urandom % 4) == 0) begin
        c0 = $urandom % 17; c1 = $urandom % 17;
        if (($urandom % 2) == 0) begin c0 = $urandom % 4; c1 = $urandom % 4; end
        peak = {pattern(c1), pattern(c0)};
      end
      if (($urandom % 6) == 0) ext_trig = !ext_trig;
    end
    checks++;
    if (ngto == 0 || ntrig == 0) begin failures++; $display("FAIL: no GTO/trigger"); end
    $display("gto=%0d triggers=%0d", ngto, ntrig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
