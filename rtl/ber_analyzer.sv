// ber_analyzer -- second stage of the diagnosis controller: turns each DME's reconstructed
// delay histogram into timing metrics and classifies the degradation mechanism.
//
// For every DME it reads the moment sums S0, S1, S2 of the delay histogram (see
// timing_data_processor) and computes, in phase steps with F fraction bits,
//     mean  mu  = S1 / S0               (centre of the transition region: effective delay)
//     var   v   = S2 / S0 - mu^2        (width of the transition region: timing spread)
// using one serial divider. In a baseline run the results are stored as the reference of each
// DME; in a measurement run the differences dmu = mu - mu_base and dvar = v - v_base are
// formed, which removes fixed offsets such as clock skew and static routing delay.
//
// The decision rule is this design's own reading of the signatures the architecture is meant
// to separate: supply (PDN) droop moves every location by about the same amount and leaves the
// spread unchanged; routing perturbation moves locations by different amounts and widens the
// spread. With tolerances TOL_MU (2 phase steps, twice the stated +-1 step accuracy),
// TOL_SPREAD and TOL_VAR over all DMEs valid in both runs:
//     no valid DME                                           -> DIAG_INVALID
//     max|dmu| < TOL_MU and max dvar < TOL_VAR               -> DIAG_NONE
//     min dmu >= TOL_MU, max-min dmu <= TOL_SPREAD, max dvar < TOL_VAR -> DIAG_PDN
//     otherwise                                              -> DIAG_ROUTING
// A DME is valid when S0 > 0 (transitions were seen). Pairwise spatial correlation is left to
// offline processing of the records.
//
// Interface: start (strobe), baseline (mode), rd_idx/rd_s* (sum read port), res_idx -> res_*
// (result read port), cr_idx -> cr_dmu/cr_valid (second read port for the spatial
// correlator), cls and the extreme values, done (strobe). Timing: about
// 2*(66) + 3 cycles per DME, then 2 cycles for the decision.
`timescale 1ps/1ps
module ber_analyzer
  import diag_pkg::*;
#(
  parameter int unsigned NUM_DME    = 32,
  parameter int unsigned SW         = 48,
  parameter int unsigned F          = 8,
  parameter int signed   TOL_MU     = 2 << 8,
  parameter int signed   TOL_SPREAD = 4 << 8,
  parameter int signed   TOL_VAR    = 4 << 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 baseline,
  output logic [ID_W-1:0]      rd_idx,
  input  logic signed [SW-1:0] rd_s0,
  input  logic signed [SW-1:0] rd_s1,
  input  logic signed [SW-1:0] rd_s2,
  input  logic [ID_W-1:0]      res_idx,
  output logic signed [31:0]   res_mu,
  output logic signed [31:0]   res_var,
  output logic signed [31:0]   res_dmu,
  output logic signed [31:0]   res_dvar,
  output logic                 res_valid,
  input  logic [ID_W-1:0]      cr_idx,
  output logic signed [31:0]   cr_dmu,
  output logic                 cr_valid,
  output diag_class_e          cls,
  output logic signed [31:0]   dmu_min,
  output logic signed [31:0]   dmu_max,
  output logic signed [31:0]   dvar_max,
  output logic                 busy,
  output logic                 done
);

  localparam int unsigned IW = (NUM_DME > 1) ? $clog2(NUM_DME) : 1;

  logic signed [31:0] mu   [NUM_DME];
  logic signed [31:0] vr   [NUM_DME];
  logic signed [31:0] bmu  [NUM_DME];
  logic signed [31:0] bvr  [NUM_DME];
  logic signed [31:0] dmu  [NUM_DME];
  logic signed [31:0] dvr  [NUM_DME];
  logic               vld  [NUM_DME];
  logic               bvld [NUM_DME];

  typedef enum logic [2:0] {A_IDLE, A_LOAD, A_DIV1, A_DIV2, A_STORE, A_NEXT, A_CLASS} astate_e;
  astate_e state;

  logic [IW-1:0]      idx;
  logic               div_start, div_busy, div_done;
  logic [63:0]        div_num, div_den, div_q;
  logic signed [31:0] cur_mu, cur_m2;
  logic               cur_ok;

  seq_divider #(.W(64)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quot(div_q)
  );

  assign rd_idx = ID_W'(idx);

  // numerators (negative moments from noise are clamped to zero)
  logic [63:0] n1, n2;
  assign n1 = rd_s1[SW-1] ? 64'd0 : (64'(rd_s1) << F);
  assign n2 = rd_s2[SW-1] ? 64'd0 : (64'(rd_s2) << F);

  logic signed [63:0] mu_sq;
  logic signed [31:0] var_now;
  assign mu_sq   = (64'(cur_mu) * 64'(cur_mu)) >>> F;
  assign var_now = (cur_m2 > 32'(mu_sq)) ? cur_m2 - 32'(mu_sq) : 32'sd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_IDLE;
      idx       <= '0;
      div_start <= 1'b0;
      div_num   <= '0;
      div_den   <= '0;
      cur_mu    <= '0;
      cur_m2    <= '0;
      cur_ok    <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      cls       <= DIAG_INVALID;
      dmu_min   <= '0;
      dmu_max   <= '0;
      dvar_max  <= '0;
      for (int i = 0; i < NUM_DME; i++) begin
        mu[i] <= '0;  vr[i] <= '0;  bmu[i] <= '0; bvr[i] <= '0;
        dmu[i] <= '0; dvr[i] <= '0; vld[i] <= 1'b0; bvld[i] <= 1'b0;
      end
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      case (state)
        A_IDLE: if (start) begin
          idx   <= '0;
          busy  <= 1'b1;
          state <= A_LOAD;
        end
        A_LOAD: begin
          cur_ok <= (rd_s0 > 0);
          if (rd_s0 > 0) begin
            div_num   <= n1;
            div_den   <= 64'(rd_s0);
            div_start <= 1'b1;
            state     <= A_DIV1;
          end else begin
            cur_mu <= '0;
            cur_m2 <= '0;
            state  <= A_STORE;
          end
        end
        A_DIV1: if (div_done) begin
          cur_mu    <= 32'(div_q);
          div_num   <= n2;
          div_start <= 1'b1;
          state     <= A_DIV2;
        end
        A_DIV2: if (div_done) begin
          cur_m2 <= 32'(div_q);
          state  <= A_STORE;
        end
        A_STORE: begin
          mu[idx]  <= cur_mu;
          vr[idx]  <= var_now;
          vld[idx] <= cur_ok;
          if (baseline) begin
            bmu[idx]  <= cur_mu;
            bvr[idx]  <= var_now;
            bvld[idx] <= cur_ok;
            dmu[idx]  <= '0;
            dvr[idx]  <= '0;
          end else begin
            dmu[idx] <= cur_mu - bmu[idx];
            dvr[idx] <= var_now - bvr[idx];
          end
          state <= A_NEXT;
        end
        A_NEXT: begin
          if (32'(idx) == NUM_DME - 1) state <= A_CLASS;
          else begin
            idx   <= idx + 1'b1;
            state <= A_LOAD;
          end
        end
        A_CLASS: begin
          automatic logic               any = 1'b0;
          automatic logic signed [31:0] mn  = 32'sh7fff_ffff;
          automatic logic signed [31:0] mx  = -32'sh7fff_ffff;
          automatic logic signed [31:0] vx  = -32'sh7fff_ffff;
          automatic logic signed [31:0] amx = 32'sd0;
          for (int i = 0; i < NUM_DME; i++) begin
            if (vld[i] && bvld[i]) begin
              any = 1'b1;
              if (dmu[i] < mn) mn = dmu[i];
              if (dmu[i] > mx) mx = dmu[i];
              if (dvr[i] > vx) vx = dvr[i];
              if ((dmu[i] < 0 ? -dmu[i] : dmu[i]) > amx) amx = (dmu[i] < 0 ? -dmu[i] : dmu[i]);
            end
          end
          dmu_min  <= any ? mn : 32'sd0;
          dmu_max  <= any ? mx : 32'sd0;
          dvar_max <= any ? vx : 32'sd0;
          if (!any)                                               cls <= DIAG_INVALID;
          else if (baseline || (amx < TOL_MU && vx < TOL_VAR))    cls <= DIAG_NONE;
          else if (mn >= TOL_MU && (mx - mn) <= TOL_SPREAD && vx < TOL_VAR) cls <= DIAG_PDN;
          else                                                    cls <= DIAG_ROUTING;
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  logic [IW-1:0] ri;
  assign ri        = res_idx[IW-1:0];
  assign res_mu    = mu[ri];
  assign res_var   = vr[ri];
  assign res_dmu   = dmu[ri];
  assign res_dvar  = dvr[ri];
  assign res_valid = vld[ri];

  // second read port (spatial correlator): shift, valid in both this run and the baseline
  logic [IW-1:0] ci;
  assign ci       = cr_idx[IW-1:0];
  assign cr_dmu   = dmu[ci];
  assign cr_valid = vld[ci] && bvld[ci];

endmodule
