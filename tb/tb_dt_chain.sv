// tb_dt_chain -- checks branch selection: after a one-hot load the output follows exactly the
// selected tap for random tap patterns, an all-zero load blocks the line, and a load with two
// bits set is refused (old selection kept, cfg_err raised, cleared by the next valid load).
`timescale 1ps/1ps
module tb_dt_chain;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;
  logic cfg_load, cfg_err, dt_out;
  logic [7:0] cfg_en, tap, en_q;

  dt_chain dut (.clk, .rst_n, .cfg_load, .cfg_en, .tap, .en_q, .cfg_err, .dt_out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic load(input logic [7:0] v);
    @(negedge clk) begin cfg_load = 1; cfg_en = v; end
    @(negedge clk) cfg_load = 0;
  endtask

  initial begin
    cfg_load = 0; cfg_en = 0; tap = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 8; s++) begin
      load(8'(1 << s));
      for (int n = 0; n < 20; n++) begin
        tap = 8'($urandom); #1;
        check(dt_out == tap[s], $sformatf("sel %0d follows tap", s));
      end
    end
    load(8'b0010_0100);
    check(cfg_err, "two branches refused");
    check(en_q == 8'b1000_0000, "old selection kept");
    tap = 8'h7f; #1; check(dt_out == 1'b0, "line follows old branch");
    load(8'h00);
    check(!cfg_err, "valid load clears error");
    tap = 8'hff; #1; check(dt_out == 1'b0, "no branch -> line idle");
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
