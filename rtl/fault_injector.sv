// fault_injector -- chooses the emulated configuration upsets of a measurement campaign.
//
// Routing-level degradation is not produced with radiation: it is emulated by switching extra
// parasitic routing attachments onto the observation branches at switch-matrix nodes. This
// block decides where and how many. It holds a region mask (which DT-chain regions are upset)
// and a level (how many attachments per upset region, 0..PERT_N). In fixed mode the level is
// what the host wrote. In cumulative mode each completed measurement campaign adds one more
// attachment (up to PERT_N), reproducing the step-wise, accumulating delay growth of repeated
// upsets on the same path. The mask/level pair is what the controller writes into the
// routing configurator of the DCN before each sweep. Baseline runs never use it.
//
// Interface: cfg_we loads mask, level and mode; advance (strobe at the end of a measurement
// campaign) steps the level in cumulative mode; upsets = attachments currently injected
// per upset region. Timing: outputs change one cycle after cfg_we/advance.
`timescale 1ps/1ps
module fault_injector #(
  parameter int unsigned PERT_N = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [31:0] cfg_mask,
  input  logic [3:0]  cfg_level,
  input  logic        cfg_cumulative,
  input  logic        advance,
  output logic [31:0] pert_mask,
  output logic [3:0]  pert_level,
  output logic        cumulative
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pert_mask  <= '0;
      pert_level <= '0;
      cumulative <= 1'b0;
    end else if (cfg_we) begin
      pert_mask  <= cfg_mask;
      pert_level <= (cfg_level > 4'(PERT_N)) ? 4'(PERT_N) : cfg_level;
      cumulative <= cfg_cumulative;
    end else if (advance && cumulative && pert_level < 4'(PERT_N)) begin
      pert_level <= pert_level + 4'd1;
    end
  end

endmodule
