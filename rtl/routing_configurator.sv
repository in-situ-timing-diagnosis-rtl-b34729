// routing_configurator -- routing configurator of the delay and control network (DCN).
//
// Owns the configuration that decides what the fabric looks like during a sweep:
//  * which delay tap (switch-matrix node) is live in every DT chain: a one-hot branch enable
//    derived from tap_sel, the same index in all chains (own choice);
//  * the emulated configuration upset of each region: how many parasitic routing attachments
//    are switched onto the region's observation branch. Regions selected by pert_mask get the
//    first pert_level attachments (thermometer code, capped at PERT_N); the others get none.
// The configuration is copied from its inputs only on `apply`, which the DCN issues before a
// sweep while no window is open, and is then held for the whole sweep. An apply that arrives
// while meas_active is high is refused and flagged in apply_err.
//
// Outputs: tap_en (to all DT chains) with a one-cycle cfg_load strobe, pert (per region, to
// the fabric) and route_state (attachment count per region, recorded with the measurements).
// Timing: outputs change one clock after apply.
`timescale 1ps/1ps
module routing_configurator #(
  parameter int unsigned NUM_DME = 32,
  parameter int unsigned N_TAPS  = 8,
  parameter int unsigned PERT_N  = 4,
  localparam int unsigned TSW    = (N_TAPS > 1) ? $clog2(N_TAPS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               apply,
  input  logic               meas_active,
  input  logic [TSW-1:0]     tap_sel,
  input  logic [NUM_DME-1:0] pert_mask,
  input  logic [3:0]         pert_level,
  output logic [N_TAPS-1:0]  tap_en,
  output logic               cfg_load,
  output logic [PERT_N-1:0]  pert [NUM_DME],
  output logic [3:0]         route_state [NUM_DME],
  output logic               apply_err
);

  logic [3:0]        lvl;
  logic [PERT_N-1:0] therm;

  assign lvl = (pert_level > 4'(PERT_N)) ? 4'(PERT_N) : pert_level;
  always_comb begin
    for (int b = 0; b < PERT_N; b++) therm[b] = (b < int'(lvl));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tap_en    <= N_TAPS'(1);
      cfg_load  <= 1'b0;
      apply_err <= 1'b0;
      for (int i = 0; i < NUM_DME; i++) begin
        pert[i]        <= '0;
        route_state[i] <= '0;
      end
    end else begin
      cfg_load <= 1'b0;
      if (apply) begin
        if (meas_active) begin
          apply_err <= 1'b1;
        end else begin
          apply_err <= 1'b0;
          cfg_load  <= 1'b1;
          tap_en    <= N_TAPS'(1) << tap_sel;
          for (int i = 0; i < NUM_DME; i++) begin
            pert[i]        <= pert_mask[i] ? therm : '0;
            route_state[i] <= pert_mask[i] ? lvl : 4'd0;
          end
        end
      end
    end
  end

endmodule
