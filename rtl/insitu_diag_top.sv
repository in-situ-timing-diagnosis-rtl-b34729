// insitu_diag_top -- in-situ timing diagnosis system with its functional design under test.
//
// The system observes the routing delay of a live user design (a 64-tap FIR filter) at
// switch-matrix nodes and separates supply-induced (PDN) delay shifts from localized,
// configuration-upset-like routing perturbations. Data flow:
//
//   fir_dut --obs[r]--> route_fabric_model[r] --tap[r][0..7]--> dt_chain[r] --1 line--> dme[r]
//   pdn_stressor --load--> (all route_fabric_model: supply droop)
//   dcn --phase--> mmcm_phase_model --clk_samp--> all dme
//   dcn --5-bit ctrl--> dme[r] --4-bit nibble--> dcn --records (valid/ready)--> aggregator
//   aggregator --packets--> diag_controller --7-bit control--> dcn --4-bit status--> controller
//   dcn (routing configurator) --tap_en/cfg_load--> dt_chain, --pert[r]--> route_fabric_model
//
// There are NUM_DME monitored regions, each with its own DT chain (N_TAPS taps) and DME, as in
// the reference deployment of 32 DT-chain/DME pairs with 8 taps per region. The routing fabric
// and the phase-shifting clock manager are behavioural models (they stand for physical delay,
// which is not logic); everything else is synthesizable. The functional clock `clk` also
// clocks the instrumentation; the DMEs additionally use the phase-shifted copy of it.
//
// Host interface: the host (a processor system outside this design) writes a campaign
// configuration and the fault-injector settings, pulses host_start, waits for host_done, and
// reads the classification, per-DME results and the spatial correlation sums. Stressor enable and intensity are host inputs.
// NUM_DME may not exceed 32 (the DCN's mask registers are 32 bits wide).
`timescale 1ps/1ps
module insitu_diag_top
  import diag_pkg::*;
#(
  parameter int unsigned NUM_DME    = 32,
  parameter int unsigned N_TAPS     = 8,
  parameter int unsigned FIR_TAPS   = 64,
  parameter int unsigned NUM_SLICES = 16,
  parameter int unsigned AGG_DEPTH  = 64,
  localparam int unsigned YW        = 16 + 16 + $clog2(FIR_TAPS),
  localparam int unsigned LW        = $clog2(NUM_SLICES + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // functional design under test
  input  logic signed [15:0]  fir_x,
  input  logic signed [15:0]  fir_coef [FIR_TAPS],
  output logic signed [YW-1:0] fir_y,
  // PDN stressor
  input  logic                stress_en,
  input  logic [LW-1:0]       stress_slices,
  output logic                stress_signature,
  // host: campaign control
  input  logic                host_start,
  input  logic                host_baseline,
  input  campaign_cfg_t       host_cfg,
  input  logic                fi_we,
  input  logic [31:0]         fi_mask,
  input  logic [3:0]          fi_level,
  input  logic                fi_cumulative,
  output logic                host_busy,
  output logic                host_done,
  output diag_class_e         diag_class,
  output logic signed [31:0]  dmu_min,
  output logic signed [31:0]  dmu_max,
  output logic signed [31:0]  dvar_max,
  output logic [31:0]         rec_count,
  output logic                seq_err,
  output logic [3:0]          upset_level,
  // host: result readout
  input  logic [ID_W-1:0]     res_idx,
  output logic signed [31:0]  res_mu,
  output logic signed [31:0]  res_var,
  output logic signed [31:0]  res_dmu,
  output logic signed [31:0]  res_dvar,
  output logic                res_valid,
  input  logic [ID_W-1:0]     prof_sel,
  input  logic [PHASE_W-1:0]  prof_addr,
  output logic [CNT_W-1:0]    prof_data,
  // spatial correlation sums
  input  logic                corr_clear,
  input  logic [ID_W-1:0]     corr_ref,
  input  logic [ID_W-1:0]     corr_idx,
  output corr_sums_t          corr_sums
);

  // ---------------- functional design and stressor ----------------
  logic [NUM_DME-1:0] obs;
  fir_dut #(.TAPS(FIR_TAPS), .DW(16), .CW(16), .NUM_OBS(NUM_DME)) u_fir (
    .clk, .rst_n, .x(fir_x), .coef(fir_coef), .y(fir_y), .obs
  );

  logic [LW-1:0] pdn_load;
  pdn_stressor #(.NUM_SLICES(NUM_SLICES)) u_stress (
    .clk, .rst_n, .en(stress_en), .n_active(stress_slices), .load(pdn_load),
    .signature(stress_signature)
  );

  // ---------------- measurement network ----------------
  dme_ctrl_t          dme_ctrl [NUM_DME];
  dme_rpt_t           dme_rpt  [NUM_DME];
  logic [PHASE_W-1:0] phase;
  logic [N_TAPS-1:0]  tap_en;
  logic               cfg_load;
  logic [PERT_N-1:0]  pert [NUM_DME];
  logic               rec_valid, rec_ready;
  meas_rec_t          rec;
  dcn_cmd_t           dcn_cmd;
  dcn_status_t        dcn_status;

  logic clk_samp;
  mmcm_phase_model #(.PHASE_W(PHASE_W), .STEP_PS(18)) u_mmcm (
    .clk_in(clk), .phase, .clk_out(clk_samp)
  );

  for (genvar r = 0; r < NUM_DME; r++) begin : g_region
    logic [N_TAPS-1:0] tap;
    logic [N_TAPS-1:0] en_q;
    logic              cfg_err;
    logic              dt_line;

    route_fabric_model #(.N_TAPS(N_TAPS), .PERT_N(PERT_N), .LOAD_W(LW), .REGION(r)) u_route (
      .src(obs[r]), .pert(pert[r]), .pdn_load, .tap
    );

    dt_chain #(.N_TAPS(N_TAPS)) u_dt (
      .clk, .rst_n, .cfg_load, .cfg_en(tap_en), .tap, .en_q, .cfg_err, .dt_out(dt_line)
    );

    dme u_dme (
      .clk, .rst_n, .clk_samp, .dt_in(dt_line), .ctrl(dme_ctrl[r]), .rpt(dme_rpt[r])
    );
  end

  dcn #(.NUM_DME(NUM_DME), .N_TAPS(N_TAPS)) u_dcn (
    .clk, .rst_n, .cmd(dcn_cmd), .status(dcn_status),
    .dme_ctrl, .dme_rpt, .phase,
    .tap_en, .cfg_load, .pert,
    .rec_valid, .rec_ready, .rec
  );

  logic      pkt_valid, pkt_ready;
  meas_pkt_t pkt;
  logic [$clog2(AGG_DEPTH):0] agg_level;
  delay_data_aggregator #(.DEPTH(AGG_DEPTH)) u_agg (
    .clk, .rst_n, .in_valid(rec_valid), .in_ready(rec_ready), .in_rec(rec),
    .out_valid(pkt_valid), .out_ready(pkt_ready), .out_pkt(pkt), .level(agg_level)
  );

  diag_controller #(.NUM_DME(NUM_DME)) u_ctrl (
    .clk, .rst_n,
    .host_start, .host_baseline, .host_cfg,
    .fi_we, .fi_mask, .fi_level, .fi_cumulative,
    .host_busy, .host_done, .diag_class, .dmu_min, .dmu_max, .dvar_max,
    .rec_count, .seq_err, .upset_level,
    .res_idx, .res_mu, .res_var, .res_dmu, .res_dvar, .res_valid,
    .prof_sel, .prof_addr, .prof_data,
    .corr_clear, .corr_ref, .corr_idx, .corr_sums,
    .dcn_cmd, .dcn_status,
    .pkt_valid, .pkt_ready, .pkt
  );

endmodule
