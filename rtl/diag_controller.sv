// diag_controller -- diagnosis controller: the central coordination and analysis unit.
//
// A campaign is one phase sweep under fixed conditions. The host chooses the settings
// (campaign_cfg_t), the emulated upsets (fault injector) and whether the run is a baseline.
// On host_start the controller
//  1. clears the timing data processor,
//  2. programs the DCN over the 7-bit control path: for each of the nine DCN registers eight
//     SHIFT nibbles (most significant first) and one WRITE; a baseline run writes an empty
//     perturbation mask, a measurement run the fault injector's mask and level;
//  3. issues START and waits until the DCN reports the sweep done and the last packet from the
//     aggregator has been consumed (the processor takes one packet per cycle);
//  4. runs the BER analyzer (baseline: store reference; measurement: differences and class);
//  5. in a measurement run, strobes the fault injector's `advance` (cumulative upsets) and
//     lets the spatial correlator add this campaign's shifts to its cross-campaign sums
//     (corr_clear / corr_ref choose the start of a series and its reference location).
// The pipeline Timing Data Processor -> BER Analyzer -> Fault Injector follows the block
// diagram of the reference design. The diagram also shows a "DCN delay data" box whose
// function is not described; the per-DME result store read by the host (res_* ports, plus
// one stored BER profile) takes its place. The spatial correlator is not drawn in the
// diagram; it carries out the correlation across locations and repeated campaigns that the
// controller is described as doing. The command sequencing and the host interface are this
// design's own.
//
// Timing: programming takes 9*9 + 1 cycles; analysis about 140 cycles per DME; correlation
// NUM_DME + 2 cycles after a measurement run.
`timescale 1ps/1ps
module diag_controller
  import diag_pkg::*;
#(
  parameter int unsigned NUM_DME = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // host
  input  logic                host_start,
  input  logic                host_baseline,
  input  campaign_cfg_t       host_cfg,
  input  logic                fi_we,
  input  logic [31:0]         fi_mask,
  input  logic [3:0]          fi_level,
  input  logic                fi_cumulative,
  output logic                host_busy,
  output logic                host_done,     // sticky until the next host_start
  output diag_class_e         diag_class,
  output logic signed [31:0]  dmu_min,
  output logic signed [31:0]  dmu_max,
  output logic signed [31:0]  dvar_max,
  output logic [31:0]         rec_count,
  output logic                seq_err,
  output logic [3:0]          upset_level,
  input  logic [ID_W-1:0]     res_idx,
  output logic signed [31:0]  res_mu,
  output logic signed [31:0]  res_var,
  output logic signed [31:0]  res_dmu,
  output logic signed [31:0]  res_dvar,
  output logic                res_valid,
  input  logic [ID_W-1:0]     prof_sel,
  input  logic [PHASE_W-1:0]  prof_addr,
  output logic [CNT_W-1:0]    prof_data,
  input  logic                corr_clear,
  input  logic [ID_W-1:0]     corr_ref,
  input  logic [ID_W-1:0]     corr_idx,
  output corr_sums_t          corr_sums,
  // DCN
  output dcn_cmd_t            dcn_cmd,
  input  dcn_status_t         dcn_status,
  // aggregator
  input  logic                pkt_valid,
  output logic                pkt_ready,
  input  meas_pkt_t           pkt
);

  localparam int unsigned SW = 48;

  // ---------------- fault injector ----------------
  logic        fi_advance, fi_cum;
  logic [31:0] fi_pmask;
  logic [3:0]  fi_plevel;
  fault_injector #(.PERT_N(PERT_N)) u_fi (
    .clk, .rst_n, .cfg_we(fi_we), .cfg_mask(fi_mask), .cfg_level(fi_level),
    .cfg_cumulative(fi_cumulative), .advance(fi_advance),
    .pert_mask(fi_pmask), .pert_level(fi_plevel), .cumulative(fi_cum)
  );
  assign upset_level = fi_plevel;

  // ---------------- timing data processor ----------------
  logic                 tdp_clear;
  logic [ID_W-1:0]      rd_idx;
  logic signed [SW-1:0] rd_s0, rd_s1, rd_s2;
  timing_data_processor #(.NUM_DME(NUM_DME), .SW(SW)) u_tdp (
    .clk, .rst_n, .clear(tdp_clear), .pkt_valid, .pkt_ready, .pkt,
    .prof_sel, .prof_addr, .prof_data,
    .rd_idx, .rd_s0, .rd_s1, .rd_s2, .rec_count, .seq_err
  );

  // ---------------- BER analyzer ----------------
  logic [ID_W-1:0]    cr_idx;
  logic signed [31:0] cr_dmu;
  logic               cr_valid;
  logic an_start, an_busy, an_done, run_baseline;
  ber_analyzer #(.NUM_DME(NUM_DME), .SW(SW)) u_ba (
    .clk, .rst_n, .start(an_start), .baseline(run_baseline),
    .rd_idx, .rd_s0, .rd_s1, .rd_s2,
    .res_idx, .res_mu, .res_var, .res_dmu, .res_dvar, .res_valid,
    .cr_idx, .cr_dmu, .cr_valid,
    .cls(diag_class), .dmu_min, .dmu_max, .dvar_max, .busy(an_busy), .done(an_done)
  );

  // ---------------- spatial correlator ----------------
  logic               sc_sample, sc_busy, sc_done;
  spatial_correlator #(.NUM_DME(NUM_DME)) u_sc (
    .clk, .rst_n, .clear(corr_clear), .ref_idx(corr_ref), .sample(sc_sample),
    .rd_idx(cr_idx), .rd_x(cr_dmu), .rd_ok(cr_valid),
    .q_idx(corr_idx), .q_sums(corr_sums), .busy(sc_busy), .done(sc_done)
  );

  // ---------------- campaign sequencer ----------------
  typedef enum logic [2:0] {C_IDLE, C_PROG, C_START, C_WAIT_BUSY, C_RUN, C_ANALYZE, C_CORR, C_FINISH} cstate_e;
  cstate_e state;

  campaign_cfg_t cfg_q;
  logic [3:0]    reg_i;   // index into the write list
  logic [3:0]    nib_i;   // 0..7 shift nibbles, 8 write
  logic [31:0]   wr_val;
  dcn_reg_e      wr_addr;

  always_comb begin
    wr_addr = DCN_REG_PHASE_START;
    wr_val  = '0;
    case (reg_i)
      4'd0: begin wr_addr = DCN_REG_PHASE_START; wr_val = 32'(cfg_q.phase_start); end
      4'd1: begin wr_addr = DCN_REG_PHASE_STOP;  wr_val = 32'(cfg_q.phase_stop);  end
      4'd2: begin wr_addr = DCN_REG_PHASE_STEP;  wr_val = 32'(cfg_q.phase_step);  end
      4'd3: begin wr_addr = DCN_REG_SETTLE;      wr_val = 32'(cfg_q.settle);      end
      4'd4: begin wr_addr = DCN_REG_WINDOW;      wr_val = 32'(cfg_q.window);      end
      4'd5: begin wr_addr = DCN_REG_TAP_SEL;     wr_val = 32'(cfg_q.tap_sel);     end
      4'd6: begin wr_addr = DCN_REG_PERT_MASK;   wr_val = run_baseline ? 32'd0 : fi_pmask;        end
      4'd7: begin wr_addr = DCN_REG_PERT_LEVEL;  wr_val = run_baseline ? 32'd0 : 32'(fi_plevel); end
      default: begin wr_addr = DCN_REG_DME_EN;   wr_val = cfg_q.dme_en;           end
    endcase
  end

  always_comb begin
    dcn_cmd = '0;
    if (state == C_PROG) begin
      dcn_cmd.valid = 1'b1;
      if (nib_i == 4'd8) begin
        dcn_cmd.op   = DCN_OP_WRITE;
        dcn_cmd.data = 4'(wr_addr);
      end else begin
        dcn_cmd.op   = DCN_OP_SHIFT;
        dcn_cmd.data = wr_val[31 - 4*nib_i -: 4];
      end
    end else if (state == C_START) begin
      dcn_cmd.valid = 1'b1;
      dcn_cmd.op    = DCN_OP_START;
    end
  end

  assign tdp_clear  = host_start && (state == C_IDLE);
  assign an_start   = (state == C_ANALYZE) && !an_busy && !an_done;
  assign host_busy  = (state != C_IDLE);

  logic an_started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      cfg_q        <= '0;
      reg_i        <= '0;
      nib_i        <= '0;
      run_baseline <= 1'b1;
      host_done    <= 1'b0;
      fi_advance   <= 1'b0;
      an_started   <= 1'b0;
      sc_sample    <= 1'b0;
    end else begin
      fi_advance <= 1'b0;
      case (state)
        C_IDLE: if (host_start) begin
          cfg_q        <= host_cfg;
          run_baseline <= host_baseline;
          reg_i        <= '0;
          nib_i        <= '0;
          host_done    <= 1'b0;
          state        <= C_PROG;
        end
        C_PROG: begin
          if (nib_i == 4'd8) begin
            nib_i <= '0;
            if (reg_i == 4'd8) state <= C_START;
            else               reg_i <= reg_i + 4'd1;
          end else begin
            nib_i <= nib_i + 4'd1;
          end
        end
        C_START:     state <= C_WAIT_BUSY;
        C_WAIT_BUSY: if (dcn_status.busy) state <= C_RUN;
        C_RUN:       if (dcn_status.sweep_done && !dcn_status.busy && !pkt_valid) begin
          an_started <= 1'b0;
          state      <= C_ANALYZE;
        end
        C_ANALYZE: begin
          if (an_start) an_started <= 1'b1;
          if (an_done && an_started) begin
            if (!run_baseline) begin
              fi_advance <= 1'b1;
              sc_sample  <= 1'b1;
              state      <= C_CORR;
            end else begin
              state <= C_FINISH;
            end
          end
        end
        C_CORR: begin
          sc_sample <= 1'b0;
          if (sc_done) state <= C_FINISH;
        end
        C_FINISH: begin
          host_done <= 1'b1;
          state     <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  a_cmd_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    dcn_cmd.valid && dcn_cmd.op == DCN_OP_WRITE |-> !dcn_status.busy);

endmodule
