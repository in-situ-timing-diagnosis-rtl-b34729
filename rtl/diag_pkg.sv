// diag_pkg -- types and constants shared by the in-situ timing diagnosis system.
//
// The widths of the three narrow links between the blocks follow the block diagram of the
// architecture: the DCN drives each delay monitoring element (DME) with a 5-bit control word,
// each DME answers with a 4-bit report nibble, the diagnosis controller programs the DCN over a
// 7-bit control path and reads back a 4-bit status word. How those bits are split into fields
// is this design's own choice; the field layout is documented on each type below.
`timescale 1ps/1ps
package diag_pkg;

  // ---------------------------------------------------------------------------------------
  // System sizes (defaults of the reference configuration)
  // ---------------------------------------------------------------------------------------
  localparam int unsigned NUM_DME_DEF = 32;  // DT-chain/DME pairs in the reference deployment
  localparam int unsigned N_TAPS_DEF  = 8;   // delay taps per monitored region
  localparam int unsigned PHASE_W     = 8;   // phase index width (256 fine phase steps)
  localparam int unsigned CNT_W       = 16;  // DME sample counters
  localparam int unsigned PERT_N      = 4;   // parasitic attachments per region (routing perturbation)
  localparam int unsigned ID_W        = 8;   // DME identifier field in records

  // A DME summary is 9 nibbles: tap identifier (4 bits), error count, correct count.
  localparam int unsigned SUM_W       = 4 + 2 * CNT_W;
  localparam int unsigned SUM_NIBS    = SUM_W / 4;

  // ---------------------------------------------------------------------------------------
  // DCN -> DME control word, 5 bits
  // ---------------------------------------------------------------------------------------
  typedef struct packed {
    logic       meas_en;   // high for the whole observation window
    logic       rpt_rd;    // one-cycle strobe: advance the report shift register by one nibble
    logic [2:0] tap_sel;   // identifier of the active delay tap, stored in the summary
  } dme_ctrl_t;

  // DME -> DCN report: one nibble of the summary, most significant nibble first.
  typedef logic [3:0] dme_rpt_t;

  // ---------------------------------------------------------------------------------------
  // Controller -> DCN control path, 7 bits
  // ---------------------------------------------------------------------------------------
  typedef enum logic [1:0] {
    DCN_OP_SHIFT = 2'd0,   // shift data nibble into the 32-bit staging register (LSB end)
    DCN_OP_WRITE = 2'd1,   // copy staging register into the register addressed by data
    DCN_OP_START = 2'd2,   // start one phase sweep with the current registers
    DCN_OP_ABORT = 2'd3    // stop the sweep at once and return to idle
  } dcn_op_e;

  typedef struct packed {
    logic       valid;
    dcn_op_e    op;
    logic [3:0] data;
  } dcn_cmd_t;

  // DCN register map (address carried in dcn_cmd_t.data of a WRITE)
  typedef enum logic [3:0] {
    DCN_REG_PHASE_START = 4'd0,
    DCN_REG_PHASE_STOP  = 4'd1,
    DCN_REG_SETTLE      = 4'd2,
    DCN_REG_WINDOW      = 4'd3,
    DCN_REG_TAP_SEL     = 4'd4,
    DCN_REG_PERT_MASK   = 4'd5,
    DCN_REG_PERT_LEVEL  = 4'd6,
    DCN_REG_DME_EN      = 4'd7,
    DCN_REG_PHASE_STEP  = 4'd8
  } dcn_reg_e;

  // DCN -> controller status path, 4 bits
  typedef struct packed {
    logic busy;        // a sweep is in progress
    logic meas_active; // measurement window open
    logic reporting;   // DME summaries are being collected
    logic sweep_done;  // sticky: last sweep finished; cleared by START
  } dcn_status_t;

  // ---------------------------------------------------------------------------------------
  // Measurement record (DCN -> aggregator) and packet (aggregator -> controller)
  // ---------------------------------------------------------------------------------------
  typedef struct packed {
    logic [ID_W-1:0]    dme_id;
    logic [PHASE_W-1:0] phase;
    logic [3:0]         tap;
    logic [3:0]         route_state;  // parasitic attachments enabled on this DME's region
    logic [CNT_W-1:0]   err_cnt;      // incorrect samples in the window
    logic [CNT_W-1:0]   ok_cnt;       // correct samples in the window
  } meas_rec_t;

  localparam logic [7:0] PKT_MAGIC = 8'hD5;

  typedef struct packed {
    logic [7:0]  magic;   // constant packet marker
    logic [15:0] seq;     // running packet number since reset
    meas_rec_t   rec;
  } meas_pkt_t;

  // Campaign settings written by the host into the diagnosis controller
  typedef struct packed {
    logic [PHASE_W-1:0] phase_start;
    logic [PHASE_W-1:0] phase_stop;
    logic [PHASE_W-1:0] phase_step;
    logic [7:0]         settle;     // cycles between a phase update and the window
    logic [15:0]        window;     // samples per window
    logic [2:0]         tap_sel;    // delay tap observed in every region
    logic [31:0]        dme_en;     // DMEs taking part
  } campaign_cfg_t;

  // Diagnosis outcome
  typedef enum logic [1:0] {
    DIAG_NONE    = 2'd0,  // no significant change from the baseline
    DIAG_PDN     = 2'd1,  // uniform mean shift, spread unchanged: global (PDN-like)
    DIAG_ROUTING = 2'd2,  // location-dependent shift and/or wider spread: local (routing-like)
    DIAG_INVALID = 2'd3   // no usable transitions observed
  } diag_class_e;

  // Pairwise moment sums of one location against the correlation reference location, over
  // the measurement campaigns in which both had a valid mean shift (x = this location's
  // shift, r = the reference's shift, both in q8 phase steps). The correlation coefficient
  // is (n*sxr - sx*sr) / sqrt((n*sxx - sx^2) * (n*srr - sr^2)).
  localparam int unsigned CORR_W = 48;
  typedef struct packed {
    logic [15:0]              n;
    logic signed [CORR_W-1:0] sx;
    logic signed [CORR_W-1:0] sxx;
    logic signed [CORR_W-1:0] sr;
    logic signed [CORR_W-1:0] srr;
    logic signed [CORR_W-1:0] sxr;
  } corr_sums_t;

endpackage
