// tb_routing_configurator -- checks that apply copies tap selection (one-hot) and the per-region
// perturbation (thermometer code of the level, only in masked regions, capped at 4), pulses
// cfg_load once, holds everything without apply, and refuses an apply during a window.
`timescale 1ps/1ps
module tb_routing_configurator;
  localparam int N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;
  logic apply, meas_active, cfg_load, apply_err;
  logic [2:0] tap_sel;
  logic [N-1:0] pert_mask;
  logic [3:0] pert_level;
  logic [7:0] tap_en;
  logic [3:0] pert [N];
  logic [3:0] route_state [N];

  routing_configurator #(.NUM_DME(N)) dut (.clk, .rst_n, .apply, .meas_active, .tap_sel, .pert_mask,
    .pert_level, .tap_en, .cfg_load, .pert, .route_state, .apply_err);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_apply(input int t, input logic [N-1:0] m, input int l);
    int loads = 0;
    tap_sel = 3'(t); pert_mask = m; pert_level = 4'(l);
    @(negedge clk) apply = 1;
    @(negedge clk) apply = 0;
    if (cfg_load) loads++;
    repeat (3) begin @(negedge clk); if (cfg_load) loads++; end
    check(loads == (meas_active ? 0 : 1), "cfg_load pulses once");
  endtask

  task automatic expect_cfg(input int t, input logic [N-1:0] m, input int l);
    int lc = (l > 4) ? 4 : l;
    check(tap_en == 8'(1 << t), $sformatf("tap_en %b for %0d", tap_en, t));
    for (int i = 0; i < N; i++) begin
      check(pert[i] == (m[i] ? 4'((1 << lc) - 1) : 4'd0), $sformatf("pert[%0d]=%b", i, pert[i]));
      check(route_state[i] == (m[i] ? 4'(lc) : 4'd0), "route_state");
    end
  endtask

  initial begin
    apply = 0; meas_active = 0; tap_sel = 0; pert_mask = 0; pert_level = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    do_apply(3, 8'b1010_0001, 2);  expect_cfg(3, 8'b1010_0001, 2);
    do_apply(7, 8'b0000_0110, 9);  expect_cfg(7, 8'b0000_0110, 9);
    do_apply(0, 8'hff, 4);         expect_cfg(0, 8'hff, 4);
    tap_sel = 5; pert_mask = 0; repeat (3) @(negedge clk);
    expect_cfg(0, 8'hff, 4);       // no apply, no change
    meas_active = 1;
    do_apply(6, 8'h00, 0);
    check(apply_err, "apply during window refused");
    expect_cfg(0, 8'hff, 4);
    meas_active = 0;
    do_apply(1, 8'h10, 1);
    check(!apply_err, "error cleared");
    expect_cfg(1, 8'h10, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
