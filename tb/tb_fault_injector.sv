// tb_fault_injector -- checks fixed mode (level as written, capped at 4, advance has no effect)
// and cumulative mode (each advance adds one attachment up to 4).
`timescale 1ps/1ps
module tb_fault_injector;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;
  logic cfg_we, cfg_cumulative, advance, cumulative;
  logic [31:0] cfg_mask, pert_mask;
  logic [3:0] cfg_level, pert_level;

  fault_injector dut (.clk, .rst_n, .cfg_we, .cfg_mask, .cfg_level, .cfg_cumulative, .advance,
                      .pert_mask, .pert_level, .cumulative);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [31:0] m, input int l, input bit c);
    @(negedge clk) begin cfg_we = 1; cfg_mask = m; cfg_level = 4'(l); cfg_cumulative = c; end
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic adv();
    @(negedge clk) advance = 1;
    @(negedge clk) advance = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_mask = 0; cfg_level = 0; cfg_cumulative = 0; advance = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(pert_mask == 0 && pert_level == 0, "reset: no upsets");
    wr(32'h0000_0842, 3, 0);
    check(pert_mask == 32'h0000_0842 && pert_level == 3 && !cumulative, "fixed write");
    adv(); adv();
    check(pert_level == 3, "fixed: advance ignored");
    wr(32'h1, 12, 0);
    check(pert_level == 4, "level capped");
    wr(32'h4, 0, 1);
    for (int k = 1; k <= 6; k++) begin
      adv();
      check(pert_level == 4'((k > 4) ? 4 : k), $sformatf("cumulative step %0d -> %0d", k, pert_level));
    end
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
