// tb_spatial_correlator -- self-checking test of the cross-campaign correlation sums.
//
// The testbench plays the BER analyzer's read port with a table of mean shifts per location
// (some marked invalid) and strobes `sample` once per synthetic campaign. A reference model
// keeps the same six sums per location in 64-bit integers, skipping pairs where either the
// location or the reference is invalid. After several campaigns every location's sums are
// compared; the Pearson coefficient computed from the hardware sums is also checked for a
// location that moves exactly with the reference (rho = 1) and one that moves against it
// (rho = -1). Also checked: the per-sample cycle count and clear.
`timescale 1ps/1ps
module tb_spatial_correlator;
  import diag_pkg::*;

  localparam int ND = 6;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, sample = 1'b0, busy, done, rd_ok;
  logic [ID_W-1:0] ref_idx = 8'd2, rd_idx, q_idx = '0;
  logic signed [31:0] rd_x;
  corr_sums_t q_sums;

  spatial_correlator #(.NUM_DME(ND)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int  xv [ND];
  bit  ok [ND];
  longint n[ND], sx[ND], sxx[ND], sr[ND], srr[ND], sxr[ND];

  assign rd_x  = xv[rd_idx];
  assign rd_ok = ok[rd_idx];

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic campaign(int k);
    int cyc = 0;
    for (int i = 0; i < ND; i++) begin
      xv[i] = int'($urandom_range(20000, 0)) - 10000;
      ok[i] = ($urandom % 5) != 0;
    end
    ok[2] = (k != 3);                 // one campaign without a valid reference
    ok[4] = 1'b1; ok[5] = 1'b1;
    xv[4] = 3 * xv[2] + 100;          // moves with the reference
    xv[5] = -2 * xv[2];               // moves against it
    for (int i = 0; i < ND; i++)
      if (ok[i] && ok[2]) begin
        n[i]++; sx[i] += xv[i]; sxx[i] += longint'(xv[i]) * xv[i];
        sr[i] += xv[2]; srr[i] += longint'(xv[2]) * xv[2]; sxr[i] += longint'(xv[i]) * xv[2];
      end
    @(negedge clk) sample = 1'b1;
    @(negedge clk) sample = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc <= ND + 2, $sformatf("sample took %0d cycles", cyc));
  endtask

  function automatic real rho(corr_sums_t s);
    real nn = real'(s.n);
    real cov = nn * real'(s.sxr) - real'(s.sx) * real'(s.sr);
    real vx  = nn * real'(s.sxx) - real'(s.sx) * real'(s.sx);
    real vr  = nn * real'(s.srr) - real'(s.sr) * real'(s.sr);
    return cov / $sqrt(vx * vr);
  endfunction

  initial begin
    for (int i = 0; i < ND; i++) begin n[i] = 0; sx[i] = 0; sxx[i] = 0; sr[i] = 0; srr[i] = 0; sxr[i] = 0; xv[i] = 0; ok[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++) campaign(k);
    for (int i = 0; i < ND; i++) begin
      q_idx = 8'(i); #1;
      check(q_sums.n == 16'(n[i]), $sformatf("n[%0d] %0d vs %0d", i, q_sums.n, n[i]));
      check(q_sums.sx == CORR_W'(sx[i]) && q_sums.sxx == CORR_W'(sxx[i]), $sformatf("x sums %0d", i));
      check(q_sums.sr == CORR_W'(sr[i]) && q_sums.srr == CORR_W'(srr[i]), $sformatf("r sums %0d", i));
      check(q_sums.sxr == CORR_W'(sxr[i]), $sformatf("cross sum %0d", i));
    end
    q_idx = 8'd4; #1; check(rho(q_sums) > 0.999, $sformatf("rho with-moving %f", rho(q_sums)));
    q_idx = 8'd5; #1; check(rho(q_sums) < -0.999, $sformatf("rho against-moving %f", rho(q_sums)));
    q_idx = 8'd2; #1; check(q_sums.n == 16'd7, "reference counted only when valid");
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    q_idx = 8'd4; #1; check(q_sums == '0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
