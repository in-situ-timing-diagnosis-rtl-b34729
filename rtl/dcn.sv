// dcn -- delay and control network: the coordination layer between the diagnosis controller
// and the distributed delay monitoring elements (DMEs).
//
// What it does (following the reference architecture):
//  * takes configuration and commands from the controller over a narrow 7-bit control path
//    and reports a 4-bit status word back;
//  * runs a phase sweep: it broadcasts the phase index (phase_sweep_ctrl), opens and closes
//    identical observation windows in all DMEs at once after a settling interval
//    (meas_enable_gen), and changes phase or configuration only between windows;
//  * applies the routing configuration (DT branch selection and emulated perturbations)
//    before each sweep (routing_configurator);
//  * after each window, collects the DMEs' summaries one DME at a time (a fixed round-robin
//    over the enabled DMEs, so there is never contention) and serialises them into records
//    that carry DME identifier, phase index, tap and routing state, handed to the aggregator
//    with a valid/ready handshake.
//
// Control path (own encoding, see diag_pkg): {valid, op[1:0], data[3:0]}. SHIFT pushes a
// nibble into a 32-bit staging register; WRITE copies it into register `data` (ignored while a
// sweep runs); START begins a sweep; ABORT ends it at once. Register defaults after reset:
// phase 0..184 step 1 (184 x 18 ps stays inside a 3.33 ns period), settle 16 cycles,
// window 1024 cycles, tap 0, no perturbation, all DMEs enabled.
//
// Timing: per phase point the sweep takes 1 + settle+1 + window + 4 (drain) cycles, then per
// enabled DME SUM_NIBS (9) cycles to read its nibbles and at least one cycle to hand over the
// record, plus 2 cycles to step the phase.
`timescale 1ps/1ps
module dcn
  import diag_pkg::*;
#(
  parameter int unsigned NUM_DME = 32,
  parameter int unsigned N_TAPS  = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // controller side
  input  dcn_cmd_t           cmd,
  output dcn_status_t        status,
  // DME side
  output dme_ctrl_t          dme_ctrl [NUM_DME],
  input  dme_rpt_t           dme_rpt  [NUM_DME],
  output logic [PHASE_W-1:0] phase,
  // DT chains and fabric configuration
  output logic [N_TAPS-1:0]  tap_en,
  output logic               cfg_load,
  output logic [PERT_N-1:0]  pert [NUM_DME],
  // records to the aggregator
  output logic               rec_valid,
  input  logic               rec_ready,
  output meas_rec_t          rec
);

  localparam int unsigned IDX_W = (NUM_DME > 1) ? $clog2(NUM_DME) : 1;
  localparam int unsigned TSW   = (N_TAPS > 1) ? $clog2(N_TAPS) : 1;

  // ---------------- configuration registers ----------------
  logic [31:0]        stage;
  logic [PHASE_W-1:0] r_phase_start, r_phase_stop, r_phase_step;
  logic [7:0]         r_settle;
  logic [15:0]        r_window;
  logic [2:0]         r_tap_sel;
  logic [31:0]        r_pert_mask;
  logic [3:0]         r_pert_level;
  logic [31:0]        r_dme_en;

  typedef enum logic [2:0] {D_IDLE, D_APPLY, D_GO, D_WIN, D_DRAIN, D_RD, D_SEND, D_STEP} dstate_e;
  dstate_e state;

  logic busy;
  assign busy = (state != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage         <= '0;
      r_phase_start <= '0;
      r_phase_stop  <= PHASE_W'(184);
      r_phase_step  <= PHASE_W'(1);
      r_settle      <= 8'd16;
      r_window      <= 16'd1024;
      r_tap_sel     <= '0;
      r_pert_mask   <= '0;
      r_pert_level  <= '0;
      r_dme_en      <= '1;
    end else if (cmd.valid) begin
      if (cmd.op == DCN_OP_SHIFT) stage <= {stage[27:0], cmd.data};
      if (cmd.op == DCN_OP_WRITE && !busy) begin
        case (dcn_reg_e'(cmd.data))
          DCN_REG_PHASE_START: r_phase_start <= stage[PHASE_W-1:0];
          DCN_REG_PHASE_STOP:  r_phase_stop  <= stage[PHASE_W-1:0];
          DCN_REG_PHASE_STEP:  r_phase_step  <= stage[PHASE_W-1:0];
          DCN_REG_SETTLE:      r_settle      <= stage[7:0];
          DCN_REG_WINDOW:      r_window      <= stage[15:0];
          DCN_REG_TAP_SEL:     r_tap_sel     <= stage[2:0];
          DCN_REG_PERT_MASK:   r_pert_mask   <= stage;
          DCN_REG_PERT_LEVEL:  r_pert_level  <= stage[3:0];
          DCN_REG_DME_EN:      r_dme_en      <= stage;
          default: ;
        endcase
      end
    end
  end

  // ---------------- sub-blocks ----------------
  logic cmd_start, cmd_abort;
  assign cmd_start = cmd.valid && (cmd.op == DCN_OP_START) && !busy;
  assign cmd_abort = cmd.valid && (cmd.op == DCN_OP_ABORT);

  logic psc_load, psc_step, psc_last;
  phase_sweep_ctrl #(.PHASE_W(PHASE_W)) u_psc (
    .clk, .rst_n, .load(psc_load), .step(psc_step),
    .phase_start(r_phase_start), .phase_stop(r_phase_stop), .phase_step(r_phase_step),
    .phase, .last(psc_last)
  );

  logic meg_go, meas_en, settling, win_done;
  meas_enable_gen #(.SETTLE_W(8), .WIN_W(16)) u_meg (
    .clk, .rst_n, .go(meg_go), .halt(cmd_abort), .settle(r_settle), .window(r_window),
    .meas_en, .settling, .done(win_done)
  );

  logic       rc_apply, apply_err;
  logic [3:0] route_state [NUM_DME];
  routing_configurator #(.NUM_DME(NUM_DME), .N_TAPS(N_TAPS), .PERT_N(PERT_N)) u_rc (
    .clk, .rst_n, .apply(rc_apply), .meas_active(meas_en), .tap_sel(TSW'(r_tap_sel)),
    .pert_mask(r_pert_mask[NUM_DME-1:0]), .pert_level(r_pert_level),
    .tap_en, .cfg_load, .pert, .route_state, .apply_err
  );

  // ---------------- sweep and collection FSM ----------------
  logic [IDX_W-1:0] idx;
  logic [3:0]       nib;
  logic [2:0]       drain;
  logic [SUM_W-1:0] collect;
  logic             sweep_done;
  logic             idx_last;
  logic             idx_en;

  assign idx_last = (32'(idx) == NUM_DME - 1);
  assign idx_en   = r_dme_en[idx];

  assign rc_apply = cmd_start;
  assign psc_load = cmd_start;
  assign meg_go   = (state == D_GO);
  assign psc_step = (state == D_STEP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= D_IDLE;
      idx        <= '0;
      nib        <= '0;
      drain      <= '0;
      collect    <= '0;
      sweep_done <= 1'b0;
    end else if (cmd_abort) begin
      state <= D_IDLE;
    end else begin
      case (state)
        D_IDLE: if (cmd_start) begin
          sweep_done <= 1'b0;
          state      <= D_APPLY;
        end
        D_APPLY: state <= D_GO;
        D_GO:    state <= D_WIN;
        D_WIN:   if (win_done) begin
          drain <= 3'd4;
          state <= D_DRAIN;
        end
        D_DRAIN: begin
          if (drain == 3'd1) begin
            idx   <= '0;
            nib   <= '0;
            state <= D_RD;
          end
          drain <= drain - 3'd1;
        end
        D_RD: begin
          if (!idx_en) begin
            if (idx_last) state <= D_STEP;
            else          idx   <= idx + 1'b1;
          end else begin
            collect <= {collect[SUM_W-5:0], dme_rpt[idx]};
            if (32'(nib) == SUM_NIBS - 1) begin
              nib   <= '0;
              state <= D_SEND;
            end else begin
              nib <= nib + 1'b1;
            end
          end
        end
        D_SEND: if (rec_ready) begin
          if (idx_last) begin
            state <= D_STEP;
          end else begin
            idx   <= idx + 1'b1;
            state <= D_RD;
          end
        end
        D_STEP: begin
          if (psc_last) begin
            state      <= D_IDLE;
            sweep_done <= 1'b1;
          end else begin
            state <= D_GO;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  // DME control words
  always_comb begin
    for (int i = 0; i < NUM_DME; i++) begin
      dme_ctrl[i].meas_en = meas_en && r_dme_en[i];
      dme_ctrl[i].rpt_rd  = (state == D_RD) && (32'(idx) == i) && r_dme_en[i];
      dme_ctrl[i].tap_sel = r_tap_sel;
    end
  end

  // Record
  assign rec_valid       = (state == D_SEND);
  assign rec.dme_id      = ID_W'(idx);
  assign rec.phase       = phase;
  assign rec.tap         = collect[SUM_W-1 -: 4];
  assign rec.route_state = route_state[idx];
  assign rec.err_cnt     = collect[2*CNT_W-1 -: CNT_W];
  assign rec.ok_cnt      = collect[CNT_W-1:0];

  assign status.busy        = busy;
  assign status.meas_active = meas_en;
  assign status.reporting   = (state == D_RD) || (state == D_SEND) || (state == D_DRAIN);
  assign status.sweep_done  = sweep_done;

  a_rec_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rec_valid && !rec_ready |=> rec_valid && $stable(rec));

endmodule
