// tb_ber_analyzer -- self-checking test of the mean/variance computation and the
// degradation classifier.
//
// The testbench plays the timing data processor: it answers the analyzer's sum reads from
// arrays. Each DME gets a binomial-shaped delay histogram (weights 1,4,6,4,1 out of 16, total
// 4096 = BER 1.0 in Q12) centred on a chosen phase with a chosen point spacing, from which
// S0, S1, S2 are formed. Reference mean and variance are computed here with the same Q8
// fixed point. Scenarios: baseline, unchanged repeat (NONE), common shift (PDN), uneven
// shift (ROUTING), widened histogram on one DME (ROUTING by spread), no data (INVALID).
// The run time of each analysis is checked against the stated bound.
`timescale 1ps/1ps
module tb_ber_analyzer;
  import diag_pkg::*;

  localparam int ND = 4;
  localparam int SW = 48;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, baseline = 1'b0;
  logic [ID_W-1:0] rd_idx, res_idx = '0;
  logic signed [SW-1:0] rd_s0, rd_s1, rd_s2;
  logic signed [31:0] res_mu, res_var, res_dmu, res_dvar, dmu_min, dmu_max, dvar_max;
  logic res_valid, busy, done, cr_valid;
  logic [ID_W-1:0] cr_idx = '0;
  logic signed [31:0] cr_dmu;
  diag_class_e cls;

  ber_analyzer #(.NUM_DME(ND), .SW(SW)) dut (.*);

  always #5 clk = ~clk;

  longint s0[ND], s1[ND], s2[ND];
  longint bmu[ND], bvar[ND];
  int checks = 0, failures = 0;

  assign rd_s0 = SW'(s0[rd_idx[1:0]]);
  assign rd_s1 = SW'(s1[rd_idx[1:0]]);
  assign rd_s2 = SW'(s2[rd_idx[1:0]]);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic set_hist(int id, int centre, int spacing);
    int w[5] = '{1, 4, 6, 4, 1};
    s0[id] = 0; s1[id] = 0; s2[id] = 0;
    for (int k = 0; k < 5; k++) begin
      longint ph = centre + (k - 2) * spacing;
      longint p  = w[k] * 256;
      s0[id] += p; s1[id] += p * ph; s2[id] += p * ph * ph;
    end
  endtask

  task automatic ref_stats(int id, output longint mu, output longint vr);
    longint m2;
    if (s0[id] <= 0) begin mu = 0; vr = 0; return; end
    mu = (s1[id] <<< 8) / s0[id];
    m2 = (s2[id] <<< 8) / s0[id];
    vr = m2 - ((mu * mu) >>> 8);
    if (vr < 0) vr = 0;
  endtask

  task automatic run(bit base, diag_class_e exp_cls, string name);
    int cyc = 0;
    @(negedge clk);
    baseline = base; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc <= ND * (2 * 66 + 3) + 4, $sformatf("%s: analysis took %0d cycles", name, cyc));
    check(cls == exp_cls, $sformatf("%s: class %s expected %s", name, cls.name(), exp_cls.name()));
    for (int i = 0; i < ND; i++) begin
      longint mu, vr;
      ref_stats(i, mu, vr);
      res_idx = 8'(i);
      #1;
      check(res_valid == (s0[i] > 0), $sformatf("%s: valid %0d", name, i));
      check(res_mu == 32'(mu), $sformatf("%s: mu %0d = %0d expected %0d", name, i, res_mu, mu));
      check(res_var == 32'(vr), $sformatf("%s: var %0d = %0d expected %0d", name, i, res_var, vr));
      if (base) begin bmu[i] = mu; bvar[i] = vr; end
      else begin
        check(res_dmu == 32'(mu - bmu[i]), $sformatf("%s: dmu %0d", name, i));
        check(res_dvar == 32'(vr - bvar[i]), $sformatf("%s: dvar %0d", name, i));
        cr_idx = 8'(i);
        #1;
        check(cr_dmu == res_dmu && cr_valid == (s0[i] > 0), $sformatf("%s: second read port %0d", name, i));
      end
    end
  endtask

  initial begin
    for (int i = 0; i < ND; i++) begin s0[i] = 0; s1[i] = 0; s2[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < ND; i++) set_hist(i, 20 + 10 * i, 2);
    run(1'b1, DIAG_NONE, "baseline");
    run(1'b0, DIAG_NONE, "repeat");
    check(dmu_min == 0 && dmu_max == 0, "repeat: no shift");
    for (int i = 0; i < ND; i++) set_hist(i, 25 + 10 * i, 2);
    run(1'b0, DIAG_PDN, "common shift");
    check(dmu_min == (5 << 8) && dmu_max == (5 << 8), "common shift: extremes");
    for (int i = 0; i < ND; i++) set_hist(i, 20 + 10 * i + ((i == 1) ? 8 : 0), 2);
    run(1'b0, DIAG_ROUTING, "uneven shift");
    check(dmu_max == (8 << 8) && dmu_min == 0, "uneven shift: extremes");
    for (int i = 0; i < ND; i++) set_hist(i, 20 + 10 * i, (i == 3) ? 4 : 2);
    run(1'b0, DIAG_ROUTING, "widened");
    check(dvar_max == (12 << 8), $sformatf("widened: dvar_max %0d", dvar_max));
    for (int i = 0; i < ND; i++) begin s0[i] = 0; s1[i] = 0; s2[i] = 0; end
    run(1'b0, DIAG_INVALID, "no data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
