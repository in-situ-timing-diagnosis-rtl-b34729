// tb_dme -- checks the delay monitoring element against a signal with a known 1000 ps delay.
// The sampling clock comes from the phase-shifter model. For a signal toggling every cycle,
// a window of W cycles must give err = W, ok = 0 when the sampling phase is before the arrival
// (55*18 = 990 ps) and err = 0, ok = W after it (56*18 = 1008 ps); toggling every other cycle
// halves the sample count; a constant signal gives no samples. The summary is read back
// nibble by nibble and must carry the tap identifier.
`timescale 1ps/1ps
module tb_dme;
  import diag_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;

  logic [7:0] phase;
  logic clk_samp, src = 1'b0, dt_in = 1'b0;
  dme_ctrl_t ctrl;
  dme_rpt_t  rpt;
  int pattern = 0;   // 0: toggle each cycle, 1: every other cycle, 2: constant
  int cyc = 0;

  mmcm_phase_model u_ph (.clk_in(clk), .phase, .clk_out(clk_samp));
  dme dut (.clk, .rst_n, .clk_samp, .dt_in, .ctrl, .rpt);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (pattern == 0 || (pattern == 1 && cyc[0])) src <= ~src;
  end
  always @(src) dt_in <= #1000 src;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic window(input int w, input int ph, input int tap, input int pat,
                        output int e, output int o, output int t);
    logic [35:0] s;
    pattern = pat;
    phase   = 8'(ph);
    repeat (6) @(negedge clk);
    ctrl.tap_sel = 3'(tap);
    ctrl.meas_en = 1'b1;
    repeat (w) @(negedge clk);
    ctrl.meas_en = 1'b0;
    repeat (4) @(negedge clk);
    s = '0;
    for (int k = 0; k < 9; k++) begin
      s = {s[31:0], rpt};
      ctrl.rpt_rd = 1'b1;
      @(negedge clk);
      ctrl.rpt_rd = 1'b0;
    end
    t = int'(s[35:32]); e = int'(s[31:16]); o = int'(s[15:0]);
  endtask

  initial begin
    int e, o, t;
    ctrl = '0; phase = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    window(100, 10, 3, 0, e, o, t);
    check(e == 100 && o == 0 && t == 3, $sformatf("early phase: err=%0d ok=%0d tap=%0d", e, o, t));
    window(100, 55, 5, 0, e, o, t);
    check(e == 100 && o == 0 && t == 5, $sformatf("990 ps: err=%0d ok=%0d", e, o));
    window(100, 56, 6, 0, e, o, t);
    check(e == 0 && o == 100 && t == 6, $sformatf("1008 ps: err=%0d ok=%0d", e, o));
    window(100, 150, 7, 0, e, o, t);
    check(e == 0 && o == 100, $sformatf("late phase: err=%0d ok=%0d", e, o));
    window(100, 20, 1, 1, e, o, t);
    check(e == 50 && o == 0, $sformatf("half toggle early: err=%0d ok=%0d", e, o));
    window(100, 120, 1, 1, e, o, t);
    check(e == 0 && o == 50, $sformatf("half toggle late: err=%0d ok=%0d", e, o));
    window(100, 20, 2, 2, e, o, t);
    check(e == 0 && o == 0, $sformatf("constant: err=%0d ok=%0d", e, o));
    window(37, 0, 0, 0, e, o, t);
    check(e == 37 && o == 0 && t == 0, $sformatf("phase 0 window 37: err=%0d ok=%0d", e, o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
