// tb_workload_locations -- evaluation workload: eight monitored locations L1..L8 observed over
// repeated sweeps, rising supply stress and rotating routing perturbations.
//
// The whole system runs with eight regions (NUM_DME = 8, everything else at its default) and
// tap 3 selected in every DT chain. After one baseline campaign the host runs:
//   * three unchanged sweeps      -> repeatability: every mean within +-1 phase step of the
//                                    baseline, class NONE;
//   * stress with 4, 8, 12, 16 slices -> class PDN, the same shift at every location, growing
//                                    with intensity as load*20 ps, variance unchanged;
//   * four campaigns, each upsetting a different pair of locations at level 3 -> class
//                                    ROUTING, shift only where upset, variance grown there.
// From the per-location shifts the testbench (acting as the host) computes the Pearson
// correlation between location L1 and every other location over the four stress campaigns and
// over the four routing campaigns: supply stress must give uniformly high correlation, the
// routing perturbations a low one; the same coefficients formed from the controller's
// spatial correlation sums must agree. Expected shifts come from the routing model's formula.
`timescale 1ps/1ps
module tb_workload_locations;
  import diag_pkg::*;

  localparam int NUM_DME = 8, FIR_TAPS = 64, TAP = 3;
  localparam int HALF = 1667;
  localparam int STEP = 18;
  localparam int SB_PS = 150, JIT_PS = 20, PERT_PS = 40, PERT_JIT_PS = 60, PDN_PS = 20;
  localparam int WINDOW = 256;
  localparam int PH_STOP = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #HALF clk = ~clk;

  logic signed [15:0] fir_x;
  logic signed [15:0] fir_coef [FIR_TAPS];
  logic signed [37:0] fir_y;
  logic        stress_en;
  logic [4:0]  stress_slices;
  logic        stress_signature;
  logic        host_start, host_baseline;
  campaign_cfg_t host_cfg;
  logic        fi_we, fi_cumulative;
  logic [31:0] fi_mask;
  logic [3:0]  fi_level;
  logic        host_busy, host_done, seq_err, res_valid;
  diag_class_e diag_class;
  logic signed [31:0] dmu_min, dmu_max, dvar_max, res_mu, res_var, res_dmu, res_dvar;
  logic [31:0] rec_count;
  logic [3:0]  upset_level;
  logic [7:0]  res_idx, prof_sel, prof_addr;
  logic [15:0] prof_data;
  logic        corr_clear;
  logic [7:0]  corr_ref, corr_idx;
  corr_sums_t  corr_sums;

  insitu_diag_top #(.NUM_DME(NUM_DME)) dut (.*);

  int checks = 0, failures = 0;
  int n_repeat = 0, n_pdn = 0, n_routing = 0, n_corr = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] lfsr = 32'h1;
  always @(posedge clk) begin
    lfsr  <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    fir_x <= 16'(lfsr[15:0] ^ lfsr[31:16]);
  end

  function automatic int loc(input int r);
    return 1 + ((7 * r) % 4);
  endfunction

  // mean shift in q8 phase steps for n attachments at location r
  function automatic int route_shift(input int r, input int n);
    return int'(((n * PERT_PS * loc(r)) + (n * PERT_JIT_PS) / 2.0) / STEP * 256.0);
  endfunction

  function automatic real pearson(input real a[4], input real b[4]);
    real ma = 0, mb = 0, sab = 0, saa = 0, sbb = 0;
    for (int k = 0; k < 4; k++) begin ma += a[k] / 4; mb += b[k] / 4; end
    for (int k = 0; k < 4; k++) begin
      sab += (a[k] - ma) * (b[k] - mb);
      saa += (a[k] - ma) * (a[k] - ma);
      sbb += (b[k] - mb) * (b[k] - mb);
    end
    return (saa > 0 && sbb > 0) ? sab / $sqrt(saa * sbb) : 0.0;
  endfunction

  task automatic run_campaign(input bit baseline);
    host_cfg.phase_start = 8'd0;
    host_cfg.phase_stop  = 8'(PH_STOP);
    host_cfg.phase_step  = 8'd1;
    host_cfg.settle      = 8'd8;
    host_cfg.window      = 16'(WINDOW);
    host_cfg.tap_sel     = 3'(TAP);
    host_cfg.dme_en      = 32'(2**NUM_DME - 1);
    host_baseline        = baseline;
    @(negedge clk) host_start = 1'b1;
    @(negedge clk) host_start = 1'b0;
    wait (host_done);
    @(negedge clk);
    check(rec_count == 32'((PH_STOP + 1) * NUM_DME), $sformatf("record count %0d", rec_count));
    check(!seq_err, "packet sequence continuous");
  endtask

  // correlation coefficient from the controller's sums
  function automatic real hw_rho(input corr_sums_t s);
    real nn = real'(s.n);
    real cov = nn * real'(s.sxr) - real'(s.sx) * real'(s.sr);
    real vx  = nn * real'(s.sxx) - real'(s.sx) * real'(s.sx);
    real vr  = nn * real'(s.srr) - real'(s.sr) * real'(s.sr);
    return (vx > 0 && vr > 0) ? cov / $sqrt(vx * vr) : 0.0;
  endfunction

  task automatic corr_restart();
    corr_ref = 8'd0;
    @(negedge clk) corr_clear = 1'b1;
    @(negedge clk) corr_clear = 1'b0;
  endtask

  real hw_p [NUM_DME];
  real hw_r [NUM_DME];

  task automatic set_upsets(input logic [31:0] mask, input int level);
    @(negedge clk) begin fi_we = 1; fi_mask = mask; fi_level = 4'(level); fi_cumulative = 0; end
    @(negedge clk) fi_we = 0;
  endtask

  real pdn_d   [NUM_DME][4];
  real route_d [NUM_DME][4];
  logic [7:0] route_masks [4] = '{8'b0000_0011, 8'b0000_1100, 8'b0011_0000, 8'b1100_0001};

  initial begin
    real rp_sum, rr_sum;
    stress_en = 0; stress_slices = 0; host_start = 0; host_baseline = 1; host_cfg = '0;
    fi_we = 0; fi_mask = 0; fi_level = 0; fi_cumulative = 0; res_idx = 0; prof_sel = 0; prof_addr = 0;
    corr_clear = 0; corr_ref = 0; corr_idx = 0;
    fir_x = 0;
    for (int k = 0; k < FIR_TAPS; k++) fir_coef[k] = 16'($urandom_range(65535, 0));
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (200) @(negedge clk);

    run_campaign(1'b1);
    check(diag_class == DIAG_NONE, "baseline");

    // repeatability
    for (int it = 0; it < 3; it++) begin
      run_campaign(1'b0);
      check(diag_class == DIAG_NONE, $sformatf("repeat %0d classified NONE (got %0d)", it, diag_class));
      for (int r = 0; r < NUM_DME; r++) begin
        res_idx = 8'(r); #1;
        check(res_dmu >= -256 && res_dmu <= 256, $sformatf("repeat %0d L%0d shift %0d within 1 step", it, r + 1, res_dmu));
      end
      n_repeat++;
    end

    // rising supply stress (a new correlation series, reference L1)
    corr_restart();
    for (int s = 0; s < 4; s++) begin
      automatic int slices = 4 * (s + 1);
      automatic int e = (slices * PDN_PS * 256) / STEP;
      stress_en = 1; stress_slices = 5'(slices);
      repeat (10) @(negedge clk);
      run_campaign(1'b0);
      check(diag_class == DIAG_PDN, $sformatf("%0d slices classified PDN (got %0d)", slices, diag_class));
      if (diag_class == DIAG_PDN) n_pdn++;
      for (int r = 0; r < NUM_DME; r++) begin
        res_idx = 8'(r); #1;
        pdn_d[r][s] = res_dmu;
        check(res_dmu > e - 384 && res_dmu < e + 384, $sformatf("%0d slices L%0d shift %0d vs %0d", slices, r + 1, res_dmu, e));
        check(res_dvar < 4 * 256, $sformatf("%0d slices L%0d spread unchanged (%0d)", slices, r + 1, res_dvar));
      end
    end
    stress_en = 0; stress_slices = 0;
    for (int r = 0; r < NUM_DME; r++) begin
      corr_idx = 8'(r); #1;
      check(corr_sums.n == 16'd4, $sformatf("L%0d counted in all four stress campaigns", r + 1));
      hw_p[r] = hw_rho(corr_sums);
    end
    repeat (10) @(negedge clk);

    // rotating routing perturbations (second series)
    corr_restart();
    for (int c = 0; c < 4; c++) begin
      set_upsets(32'(route_masks[c]), 3);
      run_campaign(1'b0);
      check(diag_class == DIAG_ROUTING, $sformatf("upset set %0d classified ROUTING (got %0d)", c, diag_class));
      if (diag_class == DIAG_ROUTING) n_routing++;
      for (int r = 0; r < NUM_DME; r++) begin
        automatic bit hit = route_masks[c][r];
        automatic int e = hit ? route_shift(r, 3) : 0;
        res_idx = 8'(r); #1;
        route_d[r][c] = res_dmu;
        check(res_dmu > e - 640 && res_dmu < e + 640, $sformatf("set %0d L%0d shift %0d vs %0d", c, r + 1, res_dmu, e));
        if (hit) check(res_dvar > 4 * 256, $sformatf("set %0d L%0d spread grew (%0d)", c, r + 1, res_dvar));
      end
    end
    set_upsets(32'd0, 0);
    for (int r = 0; r < NUM_DME; r++) begin
      corr_idx = 8'(r); #1;
      hw_r[r] = hw_rho(corr_sums);
    end

    // spatial correlation against L1
    rp_sum = 0; rr_sum = 0;
    for (int r = 1; r < NUM_DME; r++) begin
      automatic real rp = pearson(pdn_d[0], pdn_d[r]);
      automatic real rr = pearson(route_d[0], route_d[r]);
      $display("corr L1-L%0d: supply %5.2f  routing %5.2f  (on-chip sums: %5.2f %5.2f)", r + 1, rp, rr, hw_p[r], hw_r[r]);
      check(hw_p[r] - rp < 0.01 && rp - hw_p[r] < 0.01, $sformatf("on-chip supply correlation L%0d", r + 1));
      check(hw_r[r] - rr < 0.01 && rr - hw_r[r] < 0.01, $sformatf("on-chip routing correlation L%0d", r + 1));
      check(rp > 0.9, $sformatf("supply stress correlates L1 with L%0d (%f)", r + 1, rp));
      rp_sum += rp; rr_sum += rr;
    end
    check(rr_sum / (NUM_DME - 1) < 0.5, $sformatf("routing correlation low on average (%f)", rr_sum / (NUM_DME - 1)));
    if (rp_sum > rr_sum) n_corr++;

    $display("mechanisms: repeat=%0d pdn=%0d routing=%0d correlation=%0d", n_repeat, n_pdn, n_routing, n_corr);
    check(n_repeat > 0 && n_pdn > 0 && n_routing > 0 && n_corr > 0, "every workload step exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
