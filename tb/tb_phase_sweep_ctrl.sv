// tb_phase_sweep_ctrl -- checks the phase index sequence of a sweep: start, start+step, ...,
// the last index not beyond stop, `last` on exactly the final index, no change without a
// strobe, step 0 treated as 1, and load overriding step.
`timescale 1ps/1ps
module tb_phase_sweep_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;
  logic load, step, last;
  logic [7:0] phase_start, phase_stop, phase_step, phase;

  phase_sweep_ctrl dut (.clk, .rst_n, .load, .step, .phase_start, .phase_stop, .phase_step, .phase, .last);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic sweep(input int s, input int e, input int st);
    int exp_ph, n;
    phase_start = 8'(s); phase_stop = 8'(e); phase_step = 8'(st);
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    exp_ph = s; n = 0;
    forever begin
      automatic int inc = (st == 0) ? 1 : st;
      automatic bit exp_last = (exp_ph + inc > e);
      check(phase == 8'(exp_ph), $sformatf("phase %0d exp %0d", phase, exp_ph));
      check(last == exp_last, $sformatf("last at %0d", exp_ph));
      repeat (3) @(negedge clk);
      check(phase == 8'(exp_ph), "holds without step");
      @(negedge clk) step = 1;
      @(negedge clk) step = 0;
      if (exp_last) begin
        check(phase == 8'(exp_ph), "no step past the end");
        break;
      end
      exp_ph += inc;
      n++;
    end
  endtask

  initial begin
    load = 0; step = 0; phase_start = 0; phase_stop = 0; phase_step = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    sweep(0, 10, 1);
    sweep(5, 40, 7);
    sweep(200, 255, 0);
    sweep(3, 3, 4);
    // load wins over step
    phase_start = 8'd9;
    @(negedge clk) begin load = 1; step = 1; end
    @(negedge clk) begin load = 0; step = 0; end
    check(phase == 8'd9, "load has priority");
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
