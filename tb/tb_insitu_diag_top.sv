// tb_insitu_diag_top -- end-to-end test of the whole diagnosis system at its default size
// (32 regions x 8 taps, 64-tap FIR, 16 stressor slices).
//
// The FIR filter runs on pseudo-random samples throughout. The test runs complete campaigns
// (phase sweep 0..130 in 18 ps steps = 0..2340 ps, past the latest arrival the routing model
// can produce, 256-cycle windows) through the host interface:
//   1. baseline, tap 0                 -> every DME's mean delay must match the routing model
//   2. measurement with PDN stress     -> class PDN, every DME shifted by load*20 ps
//   3. measurement with upsets on some regions (fixed level 4) -> class ROUTING, shifts only
//      in the upset regions, by 4*40 ps*LOC, spread grown there
//   4. two cumulative-upset campaigns  -> injected level steps 1 -> 2, shift grows
//   5. baseline on tap 7               -> deeper tap is later than tap 0
// Expected delays are computed here from the routing model's documented delay formula, not
// from the design. It also checks record counts, packet sequence, the stored BER profile and
// the FIR output against a reference convolution and the spatial correlation sums of the
// measurement series, and counts each mechanism.
`timescale 1ps/1ps
module tb_insitu_diag_top;
  import diag_pkg::*;

  localparam int NUM_DME = 32, N_TAPS = 8, FIR_TAPS = 64;
  localparam int HALF = 1667;                   // 300 MHz functional clock
  localparam int STEP = 18;                     // ps per phase step
  localparam int BASE_PS = 300, SB_PS = 150, JIT_PS = 20, PERT_PS = 40, PERT_JIT_PS = 60, PDN_PS = 20;
  localparam int WINDOW = 256;
  localparam int PH_STOP = 130;

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

  insitu_diag_top dut (.*);

  int checks = 0, failures = 0;
  int n_baseline = 0, n_pdn = 0, n_routing = 0, n_cumul = 0, n_tapsw = 0, n_profile = 0, n_corr = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // pseudo-random FIR input and reference model
  logic [31:0] lfsr = 32'h1;
  logic signed [15:0] xh [FIR_TAPS+2];
  always @(posedge clk) begin
    lfsr  <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    fir_x <= 16'(lfsr[15:0] ^ lfsr[31:16]);
  end
  int fir_checked = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = FIR_TAPS + 1; i > 0; i--) xh[i] <= xh[i-1];
      xh[0] <= fir_x;
    end
  end
  // y after this edge equals sum coef[k]*x presented k+2 edges earlier; sample just before edge
  always @(negedge clk) begin
    if (rst_n && fir_checked < 200 && $time > 400000) begin
      automatic longint acc = 0;
      for (int k = 0; k < FIR_TAPS; k++) acc += longint'(fir_coef[k]) * longint'(xh[k+1]);
      check(fir_y == 38'(acc), "FIR output matches reference convolution");
      fir_checked++;
    end
  end

  function automatic int loc(input int r);
    return 1 + ((7 * r) % 4);
  endfunction

  // expected mean delay in q8 phase steps for tap t: base + depth + uniform jitter mean + extras
  // (+0.5 step: the histogram bin (phi-1, phi] is credited to phi)
  function automatic int exp_mu(input int t, input int extra_ps, input int extra_jit);
    real d;
    d = BASE_PS + (t + 1) * SB_PS + ((t + 1) * JIT_PS + extra_jit) / 2.0 + extra_ps;
    return int'((d / STEP + 0.5) * 256.0);
  endfunction

  task automatic run_campaign(input bit baseline, input int tap);
    host_cfg.phase_start = 8'd0;
    host_cfg.phase_stop  = 8'(PH_STOP);
    host_cfg.phase_step  = 8'd1;
    host_cfg.settle      = 8'd8;
    host_cfg.window      = 16'(WINDOW);
    host_cfg.tap_sel     = 3'(tap);
    host_cfg.dme_en      = '1;
    host_baseline        = baseline;
    @(negedge clk) host_start = 1'b1;
    @(negedge clk) host_start = 1'b0;
    wait (host_done);
    @(negedge clk);
    check(rec_count == 32'((PH_STOP + 1) * NUM_DME), $sformatf("record count %0d", rec_count));
    check(!seq_err, "packet sequence continuous");
  endtask

  task automatic get_res(input int r);
    res_idx = 8'(r);
    #1;
  endtask

  initial begin
    int ref0 [NUM_DME];
    stress_en = 0; stress_slices = 0; host_start = 0; host_baseline = 1; host_cfg = '0;
    fi_we = 0; fi_mask = 0; fi_level = 0; fi_cumulative = 0; res_idx = 0; prof_sel = 0; prof_addr = 0;
    corr_clear = 0; corr_ref = 0; corr_idx = 0;
    fir_x = 0;
    for (int k = 0; k < FIR_TAPS; k++) fir_coef[k] = 16'($urandom_range(65535, 0));
    for (int i = 0; i < FIR_TAPS + 2; i++) xh[i] = 0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (200) @(negedge clk);

    // 1. baseline tap 0
    prof_sel = 8'd5;
    run_campaign(1'b1, 0);
    n_baseline++;
    check(diag_class == DIAG_NONE, "baseline classified NONE");
    for (int r = 0; r < NUM_DME; r++) begin
      get_res(r);
      ref0[r] = res_mu;
      check(res_valid, $sformatf("DME %0d valid in baseline", r));
      check(res_mu > exp_mu(0, 0, 0) - 512 && res_mu < exp_mu(0, 0, 0) + 512,
            $sformatf("DME %0d baseline mean %0d vs %0d (q8 steps)", r, res_mu, exp_mu(0, 0, 0)));
    end
    // BER profile of DME 5: errors at phase 0 (before arrival), none late in the period
    prof_addr = 8'd0; #1;
    check(prof_data > 16'(WINDOW / 8), $sformatf("profile at phase 0 = %0d", prof_data));
    prof_addr = 8'd120; #1;
    check(prof_data == 0, $sformatf("profile at phase 120 = %0d", prof_data));
    n_profile++;

    // 2. PDN stress: all 16 slices
    stress_en = 1; stress_slices = 5'd16;
    repeat (10) @(negedge clk);
    run_campaign(1'b0, 0);
    check(diag_class == DIAG_PDN, $sformatf("PDN stress classified PDN (got %0d)", diag_class));
    if (diag_class == DIAG_PDN) n_pdn++;
    for (int r = 0; r < NUM_DME; r++) begin
      get_res(r);
      check(res_dmu > (16 * PDN_PS * 256) / STEP - 512 && res_dmu < (16 * PDN_PS * 256) / STEP + 512,
            $sformatf("DME %0d PDN shift %0d", r, res_dmu));
    end
    stress_en = 0; stress_slices = 0;
    repeat (10) @(negedge clk);

    // 3. routing perturbation on regions 1, 6, 11 at level 4
    @(negedge clk) begin fi_we = 1; fi_mask = 32'h0000_0842; fi_level = 4'd4; fi_cumulative = 0; end
    @(negedge clk) fi_we = 0;
    run_campaign(1'b0, 0);
    check(diag_class == DIAG_ROUTING, $sformatf("upsets classified ROUTING (got %0d)", diag_class));
    if (diag_class == DIAG_ROUTING) n_routing++;
    for (int r = 0; r < NUM_DME; r++) begin
      automatic bit hit = (r == 1 || r == 6 || r == 11);
      automatic int e = hit ? exp_mu(0, 4 * PERT_PS * loc(r), 4 * PERT_JIT_PS) - exp_mu(0, 0, 0) : 0;
      get_res(r);
      check(res_dmu > e - 640 && res_dmu < e + 640, $sformatf("DME %0d routing shift %0d vs %0d", r, res_dmu, e));
      if (hit) check(res_dvar > 4 * 256, $sformatf("DME %0d spread grew %0d", r, res_dvar));
    end

    // 4. cumulative upsets on region 2: level 1 then 2
    @(negedge clk) begin fi_we = 1; fi_mask = 32'h0000_0004; fi_level = 4'd1; fi_cumulative = 1; end
    @(negedge clk) fi_we = 0;
    begin
      int d1, d2;
      run_campaign(1'b0, 0);
      get_res(2); d1 = res_dmu;
      check(upset_level == 4'd2, "cumulative injector stepped to level 2");
      run_campaign(1'b0, 0);
      get_res(2); d2 = res_dmu;
      check(upset_level == 4'd3, "cumulative injector stepped to level 3");
      check(d2 > d1 + 128, $sformatf("cumulative shift grows %0d -> %0d", d1, d2));
      if (d2 > d1 + 128) n_cumul++;
    end

    // the four measurement campaigns so far form one correlation series (reference DME 0):
    // DME 0 took part in all four; its shift equals the reference shift, so its own
    // coefficient is 1 (x = r in every campaign)
    corr_idx = 8'd0; #1;
    check(corr_sums.n == 16'd4, $sformatf("correlation series length %0d", corr_sums.n));
    check(corr_sums.sx == corr_sums.sr && corr_sums.sxx == corr_sums.sxr && corr_sums.sxx == corr_sums.srr,
          "reference correlates with itself");
    corr_idx = 8'd2; #1;
    check(corr_sums.n == 16'd4 && corr_sums.sx > corr_sums.sr, "cumulative region shifted more than the reference");
    if (corr_sums.n == 16'd4) n_corr++;

    // 5. deeper tap
    run_campaign(1'b1, 7);
    for (int r = 0; r < NUM_DME; r++) begin
      get_res(r);
      check(res_mu > ref0[r] + 256 * 40 && res_mu > exp_mu(7, 0, 0) - 768 && res_mu < exp_mu(7, 0, 0) + 768,
            $sformatf("DME %0d tap 7 mean %0d vs %0d", r, res_mu, exp_mu(7, 0, 0)));
    end
    n_tapsw++;

    $display("mechanisms: baseline=%0d pdn=%0d routing=%0d cumulative=%0d tap_switch=%0d profile=%0d correlation=%0d",
             n_baseline, n_pdn, n_routing, n_cumul, n_tapsw, n_profile, n_corr);
    check(n_baseline > 0 && n_pdn > 0 && n_routing > 0 && n_cumul > 0 && n_tapsw > 0 && n_profile > 0 && n_corr > 0,
          "every mechanism exercised");
    check(fir_checked > 0, "FIR checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
