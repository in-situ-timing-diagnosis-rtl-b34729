// tb_dcn -- self-checking test of the delay and control network.
//
// Four DMEs are replaced by small models with the same report protocol as the real DME:
// they count the cycles their measurement enable is high, and when it falls they load a
// 36-bit summary {tap, err, ok} with err = 4*phase + id and ok = window length, which the DCN
// then shifts out four bits per read strobe. The testbench programs the DCN over the 7-bit
// command path and checks: the register write protocol, the phase sequence (start, stop and
// step, also with a stop that is not on the step grid), the window length seen by every DME,
// DME enable gating (a disabled DME gets no window and produces no record), the perturbation
// thermometer and route state of the selected regions, the DT tap enables, the record
// contents and order under random backpressure, that writes during a sweep are ignored, and
// ABORT.
`timescale 1ps/1ps
module tb_dcn;
  import diag_pkg::*;

  localparam int ND = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  dcn_cmd_t    cmd;
  dcn_status_t status;
  dme_ctrl_t   dme_ctrl [ND];
  dme_rpt_t    dme_rpt  [ND];
  logic [PHASE_W-1:0] phase;
  logic [7:0]  tap_en;
  logic        cfg_load;
  logic [PERT_N-1:0] pert [ND];
  logic        rec_valid, rec_ready;
  meas_rec_t   rec;

  dcn #(.NUM_DME(ND), .N_TAPS(8)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- DME models ----------------
  logic [SUM_W-1:0] sum_sh [ND];
  int               wcnt   [ND];
  logic             men_q  [ND];
  logic [7:0]       ph_lat [ND];
  int               windows[ND];
  for (genvar i = 0; i < ND; i++) begin : g_dme
    assign dme_rpt[i] = sum_sh[i][SUM_W-1 -: 4];
    always @(posedge clk) begin
      men_q[i] <= dme_ctrl[i].meas_en;
      if (dme_ctrl[i].meas_en && !men_q[i]) begin wcnt[i] <= 1; ph_lat[i] <= phase; windows[i]++; end
      else if (dme_ctrl[i].meas_en)         wcnt[i] <= wcnt[i] + 1;
      if (!dme_ctrl[i].meas_en && men_q[i])
        sum_sh[i] <= {4'(dme_ctrl[i].tap_sel), 16'(4 * ph_lat[i] + i), 16'(wcnt[i])};
      else if (dme_ctrl[i].rpt_rd)
        sum_sh[i] <= {sum_sh[i][SUM_W-5:0], 4'h0};
    end
  end

  // ---------------- record capture ----------------
  meas_rec_t got[$];
  int stall_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (rec_valid && rec_ready) got.push_back(rec);
    if (rec_valid && !rec_ready) stall_cycles++;
  end
  always @(negedge clk) rec_ready = ($urandom % 3) != 0;

  // ---------------- command helpers ----------------
  task automatic send_cmd(dcn_op_e op, logic [3:0] data);
    @(negedge clk);
    cmd.valid = 1'b1; cmd.op = op; cmd.data = data;
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic write_reg(dcn_reg_e r, logic [31:0] v);
    for (int k = 7; k >= 0; k--) send_cmd(DCN_OP_SHIFT, v[4*k +: 4]);
    send_cmd(DCN_OP_WRITE, 4'(r));
  endtask

  task automatic wait_done(int limit);
    int n = 0;
    while (!(status.sweep_done && !status.busy) && n < limit) begin @(negedge clk); n++; end
    check(n < limit, "sweep finished");
  endtask

  task automatic expect_recs(int p0, int p1, int pstep, logic [3:0] en, int tap, int win,
                             logic [3:0] mask, int level, string name);
    int k = 0;
    for (int ph = p0; ph <= p1; ph += pstep)
      for (int i = 0; i < ND; i++)
        if (en[i]) begin
          if (k >= got.size()) begin check(0, $sformatf("%s: missing record", name)); return; end
          check(got[k].dme_id == 8'(i) && got[k].phase == 8'(ph),
                $sformatf("%s: record %0d id/phase %0d/%0d expected %0d/%0d", name, k,
                          got[k].dme_id, got[k].phase, i, ph));
          check(got[k].err_cnt == 16'(4 * ph + i), $sformatf("%s: err field %0d", name, k));
          check(got[k].ok_cnt == 16'(win), $sformatf("%s: window %0d = %0d", name, k, got[k].ok_cnt));
          check(got[k].tap == 4'(tap), $sformatf("%s: tap %0d", name, k));
          check(got[k].route_state == (mask[i] ? 4'(level) : 4'd0), $sformatf("%s: route state %0d", name, k));
          k++;
        end
    check(got.size() == k, $sformatf("%s: %0d records, expected %0d", name, got.size(), k));
  endtask

  initial begin
    cmd = '0;
    for (int i = 0; i < ND; i++) begin sum_sh[i] = '0; wcnt[i] = 0; windows[i] = 0; men_q[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // ---- sweep 1 ----
    write_reg(DCN_REG_PHASE_START, 5);
    write_reg(DCN_REG_PHASE_STOP, 20);
    write_reg(DCN_REG_PHASE_STEP, 5);
    write_reg(DCN_REG_SETTLE, 3);
    write_reg(DCN_REG_WINDOW, 40);
    write_reg(DCN_REG_TAP_SEL, 3);
    write_reg(DCN_REG_PERT_MASK, 32'b0101);
    write_reg(DCN_REG_PERT_LEVEL, 2);
    write_reg(DCN_REG_DME_EN, 32'b1011);
    got.delete();
    send_cmd(DCN_OP_START, 0);
    check(status.busy, "busy after start");
    // a write during the sweep must not take effect
    write_reg(DCN_REG_WINDOW, 99);
    wait_done(20000);
    expect_recs(5, 20, 5, 4'b1011, 3, 40, 4'b0101, 2, "sweep1");
    check(windows[2] == 0, "disabled DME saw no window");
    check(windows[0] == 4 && windows[3] == 4, "one window per phase point");
    check(tap_en == 8'b0000_1000, "tap enable one-hot");
    check(pert[0] == 4'b0011 && pert[2] == 4'b0011 && pert[1] == 4'b0 && pert[3] == 4'b0,
          "perturbation thermometer");
    check(stall_cycles > 0, "backpressure exercised");
    // ---- sweep 2: stop off the grid, same (unchanged) window ----
    write_reg(DCN_REG_PHASE_START, 0);
    write_reg(DCN_REG_PHASE_STOP, 7);
    write_reg(DCN_REG_PHASE_STEP, 3);
    write_reg(DCN_REG_DME_EN, 32'b1111);
    write_reg(DCN_REG_PERT_MASK, 32'b1000);
    write_reg(DCN_REG_PERT_LEVEL, 9);   // above PERT_N: capped at 4
    write_reg(DCN_REG_TAP_SEL, 6);
    got.delete();
    send_cmd(DCN_OP_START, 0);
    wait_done(20000);
    expect_recs(0, 6, 3, 4'b1111, 6, 40, 4'b1000, 4, "sweep2");
    check(pert[3] == 4'b1111, "perturbation capped at PERT_N");
    // ---- abort ----
    send_cmd(DCN_OP_START, 0);
    while (!status.meas_active) @(negedge clk);
    send_cmd(DCN_OP_ABORT, 0);
    check(!status.busy && !status.meas_active, "abort stops the sweep");
    check(!status.sweep_done, "aborted sweep is not reported done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
