// tb_pdn_stressor -- checks the activity stressor: `load` equals the number of active slices
// (0 when disabled), an enabled slice follows an independently written LFSR/MAC reference,
// a slice beyond n_active holds its state, and the signature toggles only under activity.
`timescale 1ps/1ps
module tb_pdn_stressor;
  localparam int NS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;
  logic en;
  logic [2:0] n_active, load;
  logic signature;

  pdn_stressor #(.NUM_SLICES(NS)) dut (.clk, .rst_n, .en, .n_active, .load, .signature);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ra, rb;
  logic signed [39:0] rm;

  initial begin
    int sig_changes;
    logic last_sig;
    logic [31:0] held;
    en = 0; n_active = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(load == 0, "load 0 when disabled");
    // reference for slice 0 from its reset state
    ra = 32'hACE1_0000 ^ 32'd1;
    rb = 32'h1234_5678;
    rm = 0;
    en = 1; n_active = 3'd2;
    held = dut.lfsr_a[3];
    for (int n = 0; n < 200; n++) begin
      @(posedge clk);
      rm = 40'(longint'(rm) + longint'($signed(ra[15:0] ^ rb[31:16])) * longint'($signed(rb[15:0])));
      ra = ra[0] ? ((ra >> 1) ^ 32'h8020_0003) : (ra >> 1);
      rb = rb[0] ? ((rb >> 1) ^ 32'h8000_0EA6) : (rb >> 1);
      @(negedge clk);
      check(dut.lfsr_a[0] == ra && dut.lfsr_b[0] == rb && dut.mac[0] == rm, $sformatf("slice 0 step %0d", n));
      if (n > 1) check(load == 3'd2, "load = 2 active slices");
    end
    check(dut.lfsr_a[3] == held, "inactive slice holds its state");
    en = 1; n_active = 3'd7;            // more than available: all 4
    repeat (3) @(negedge clk);
    check(load == 3'd4, "load saturates at NUM_SLICES");
    sig_changes = 0; last_sig = signature;
    repeat (64) begin @(negedge clk); if (signature != last_sig) sig_changes++; last_sig = signature; end
    check(sig_changes > 8, "signature toggles under activity");
    en = 0;
    repeat (3) @(negedge clk);
    check(load == 0, "load 0 after disable");
    sig_changes = 0; last_sig = signature;
    repeat (32) begin @(negedge clk); if (signature != last_sig) sig_changes++; last_sig = signature; end
    check(sig_changes == 0, "no activity when disabled");
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
