// tb_diag_controller -- self-checking test of the diagnosis controller (sequencer, timing
// data processor, BER analyzer and fault injector together).
//
// The DCN and aggregator are replaced by a model in the testbench. It decodes the 7-bit
// command stream independently (nibble staging register, WRITE, START), then plays a sweep:
// for every phase point and enabled DME it sends one packet whose error count is a step in
// phase, i.e. a node whose transition arrives at a known phase ("centre"). Centres move by a
// common offset (supply-like) or, for the regions in the programmed perturbation mask, by
// 3 phase steps per perturbation level (routing-like). Checked: every register value the
// controller programs (empty mask in a baseline run), the record count, per-DME mean from
// the analyzer, the class of each run, the stored profile, the upset level stepping in
// cumulative mode, and the sticky done flag.
`timescale 1ps/1ps
module tb_diag_controller;
  import diag_pkg::*;

  localparam int ND = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic host_start = 1'b0, host_baseline = 1'b0;
  campaign_cfg_t host_cfg;
  logic fi_we = 1'b0, fi_cumulative = 1'b0;
  logic [31:0] fi_mask = '0;
  logic [3:0]  fi_level = '0;
  logic host_busy, host_done, res_valid, seq_err, pkt_valid, pkt_ready;
  diag_class_e diag_class;
  logic signed [31:0] dmu_min, dmu_max, dvar_max, res_mu, res_var, res_dmu, res_dvar;
  logic [31:0] rec_count;
  logic [3:0]  upset_level;
  logic [ID_W-1:0] res_idx = '0, prof_sel = 8'd1;
  logic [PHASE_W-1:0] prof_addr = '0;
  logic [CNT_W-1:0] prof_data;
  logic corr_clear = 1'b0;
  logic [ID_W-1:0] corr_ref = '0, corr_idx = '0;
  corr_sums_t corr_sums;
  dcn_cmd_t dcn_cmd;
  dcn_status_t dcn_status;
  meas_pkt_t pkt;

  diag_controller #(.NUM_DME(ND)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- DCN + aggregator model ----------------
  logic [31:0] stage;
  logic [31:0] regs [16];
  bit          start_seen;
  int          shift_ps = 0;           // common (supply-like) shift in phase steps
  int          base_c [ND] = '{20, 30, 40, 50};
  logic [15:0] seq = '0;
  int          sent = 0;

  always @(posedge clk) if (rst_n && dcn_cmd.valid) begin
    case (dcn_cmd.op)
      DCN_OP_SHIFT: stage <= {stage[27:0], dcn_cmd.data};
      DCN_OP_WRITE: regs[dcn_cmd.data] <= stage;
      DCN_OP_START: start_seen <= 1'b1;
      default: ;
    endcase
  end

  task automatic play_sweep();
    int p0 = int'(regs[DCN_REG_PHASE_START]), p1 = int'(regs[DCN_REG_PHASE_STOP]);
    int st = int'(regs[DCN_REG_PHASE_STEP]), win = int'(regs[DCN_REG_WINDOW]);
    @(negedge clk);
    dcn_status = '0; dcn_status.busy = 1'b1;
    repeat (3) @(negedge clk);
    for (int ph = p0; ph <= p1; ph += st)
      for (int i = 0; i < ND; i++)
        if (regs[DCN_REG_DME_EN][i]) begin
          int c = base_c[i] + shift_ps +
                  (regs[DCN_REG_PERT_MASK][i] ? 3 * int'(regs[DCN_REG_PERT_LEVEL]) : 0);
          int e = (ph < c) ? win : 0;
          pkt.magic = PKT_MAGIC; pkt.seq = seq; pkt.rec = '0;
          pkt.rec.dme_id = 8'(i); pkt.rec.phase = 8'(ph);
          pkt.rec.err_cnt = 16'(e); pkt.rec.ok_cnt = 16'(win - e);
          pkt_valid = 1'b1;
          @(negedge clk);
          seq++; sent++;
          pkt_valid = 1'b0;
          @(negedge clk);
        end
    dcn_status.busy = 1'b0; dcn_status.sweep_done = 1'b1;
  endtask

  always @(negedge clk) if (start_seen) begin
    start_seen = 1'b0;
    play_sweep();
  end

  task automatic campaign(bit base, diag_class_e exp_cls, string name);
    int n = 0;
    sent = 0;
    @(negedge clk);
    host_baseline = base; host_start = 1'b1;
    @(negedge clk);
    host_start = 1'b0;
    check(host_busy, $sformatf("%s: busy", name));
    while (!host_done && n < 40000) begin @(negedge clk); n++; end
    check(host_done, $sformatf("%s: done", name));
    check(regs[DCN_REG_PHASE_START] == 32'(host_cfg.phase_start) &&
          regs[DCN_REG_PHASE_STOP] == 32'(host_cfg.phase_stop) &&
          regs[DCN_REG_PHASE_STEP] == 32'(host_cfg.phase_step) &&
          regs[DCN_REG_SETTLE] == 32'(host_cfg.settle) &&
          regs[DCN_REG_WINDOW] == 32'(host_cfg.window) &&
          regs[DCN_REG_TAP_SEL] == 32'(host_cfg.tap_sel) &&
          regs[DCN_REG_DME_EN] == host_cfg.dme_en, $sformatf("%s: programmed registers", name));
    check(rec_count == 32'(sent) && sent == ND * 61, $sformatf("%s: record count %0d", name, rec_count));
    check(!seq_err, $sformatf("%s: sequence", name));
    check(diag_class == exp_cls, $sformatf("%s: class %s expected %s", name, diag_class.name(), exp_cls.name()));
    repeat (5) @(negedge clk);
    check(host_done && !host_busy, $sformatf("%s: done is sticky", name));
  endtask

  initial begin
    pkt = '0; pkt_valid = 1'b0; dcn_status = '0; start_seen = 1'b0; stage = '0;
    for (int i = 0; i < 16; i++) regs[i] = '0;
    host_cfg = '0;
    host_cfg.phase_start = 0; host_cfg.phase_stop = 120; host_cfg.phase_step = 2;
    host_cfg.settle = 5; host_cfg.window = 100; host_cfg.tap_sel = 2;
    host_cfg.dme_en = 32'hF;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // the injector holds a mask, but a baseline run must not apply it
    @(negedge clk);
    fi_we = 1'b1; fi_mask = 32'b0010; fi_level = 4'd2; fi_cumulative = 1'b0;
    @(negedge clk);
    fi_we = 1'b0;
    campaign(1'b1, DIAG_NONE, "baseline");
    check(regs[DCN_REG_PERT_MASK] == 0 && regs[DCN_REG_PERT_LEVEL] == 0, "baseline: no perturbation");
    for (int i = 0; i < ND; i++) begin
      res_idx = 8'(i); #1;
      // step between phases 2k-2 and 2k at the first even phase >= centre
      check(res_valid && res_mu == 32'(((base_c[i] + 1) / 2 * 2) << 8),
            $sformatf("baseline mu %0d = %0d", i, res_mu));
    end
    prof_addr = 8'(28); #1; check(prof_data == 16'd100, "profile before the edge");
    prof_addr = 8'(30); #1; check(prof_data == 16'd0, "profile after the edge");
    // routing-like: only region 1 moves, by 3*2 = 6 steps
    campaign(1'b0, DIAG_ROUTING, "routing");
    check(regs[DCN_REG_PERT_MASK] == 32'b0010 && regs[DCN_REG_PERT_LEVEL] == 2, "routing: mask programmed");
    check(dmu_max == (6 << 8) && dmu_min == 0, "routing: shift of region 1 only");
    check(upset_level == 4'd2, "non-cumulative level unchanged");
    // one measurement campaign so far: region 1 shifted by 6 steps, the reference (0) by none
    corr_idx = 8'd1; #1;
    check(corr_sums.n == 1 && corr_sums.sx == (6 << 8) && corr_sums.sxx == (36 << 16) &&
          corr_sums.sr == 0 && corr_sums.sxr == 0, "correlation sums after one campaign");
    corr_idx = 8'd0; #1;
    check(corr_sums.n == 1 && corr_sums.sx == 0, "reference sums after one campaign");
    // supply-like: every region moves by 6 steps, no perturbation
    @(negedge clk);
    fi_we = 1'b1; fi_mask = 32'b0; fi_level = 4'd0;
    @(negedge clk);
    fi_we = 1'b0;
    shift_ps = 6;
    campaign(1'b0, DIAG_PDN, "supply");
    check(dmu_min == (6 << 8) && dmu_max == (6 << 8), "supply: common shift");
    corr_idx = 8'd3; #1;
    check(corr_sums.n == 2 && corr_sums.sx == (6 << 8) && corr_sums.sr == (6 << 8) &&
          corr_sums.sxr == (36 << 16), "correlation sums after the supply campaign");
    @(negedge clk) corr_clear = 1'b1;
    @(negedge clk) corr_clear = 1'b0;
    #1 check(corr_sums.n == 0, "correlation cleared");
    // no change at all
    shift_ps = 0;
    campaign(1'b0, DIAG_NONE, "unchanged");
    // cumulative upsets: level steps after every measurement run
    @(negedge clk);
    fi_we = 1'b1; fi_mask = 32'b0100; fi_level = 4'd1; fi_cumulative = 1'b1;
    @(negedge clk);
    fi_we = 1'b0;
    // level 1 moves region 2 by 3 steps (4 on the 2-step grid)
    campaign(1'b0, DIAG_ROUTING, "cumulative 1");
    check(dmu_max == (4 << 8), $sformatf("cumulative 1: shift %0d", dmu_max));
    check(upset_level == 4'd2, "cumulative: level advanced to 2");
    campaign(1'b0, DIAG_ROUTING, "cumulative 2");
    check(dmu_max == (6 << 8), $sformatf("cumulative 2: shift %0d", dmu_max));
    check(upset_level == 4'd3, "cumulative: level advanced to 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
