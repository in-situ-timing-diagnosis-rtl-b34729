// tb_meas_enable_gen -- checks window timing: meas_en rises exactly settle+1 cycles after go,
// stays high exactly `window` cycles, done pulses once in the following cycle; go is ignored
// while busy; halt closes a window at once.
`timescale 1ps/1ps
module tb_meas_enable_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;
  logic go, halt, meas_en, settling, done;
  logic [7:0] settle;
  logic [15:0] window;

  meas_enable_gen dut (.clk, .rst_n, .go, .halt, .settle, .window, .meas_en, .settling, .done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int s, input int w);
    int t_rise, n_high, n_done, t;
    settle = 8'(s); window = 16'(w);
    @(negedge clk) go = 1;
    @(negedge clk) go = 0;
    t = 1; t_rise = -1; n_high = 0; n_done = 0;
    while (t < s + w + 20) begin
      if (meas_en && t_rise < 0) t_rise = t;
      if (meas_en) n_high++;
      if (done) begin
        n_done++;
        check(!meas_en && n_high == ((w == 0) ? 1 : w), "done right after the window");
      end
      if (t == 3) begin go = 1; @(negedge clk); go = 0; t++; continue; end  // ignored while busy
      @(negedge clk);
      t++;
    end
    check(t_rise == s + 2, $sformatf("settle %0d: rise after %0d cycles", s, t_rise));
    check(n_high == ((w == 0) ? 1 : w), $sformatf("window %0d: high %0d cycles", w, n_high));
    check(n_done == 1, "one done pulse");
  endtask

  initial begin
    go = 0; halt = 0; settle = 0; window = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(16, 100);
    run(4, 1);
    run(7, 0);
    run(30, 257);
    settle = 2; window = 50;
    @(negedge clk) go = 1;
    @(negedge clk) go = 0;
    repeat (10) @(negedge clk);
    check(meas_en, "window open");
    halt = 1; @(negedge clk) halt = 0;
    check(!meas_en && !settling, "halt closes the window");
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
