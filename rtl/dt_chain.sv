// dt_chain -- delay-tap (DT) chain of one monitored routing region.
//
// A delay tap is not a new routing resource: it is an extra, observation-only fan-out branch
// switched on at an existing switch-matrix I/O node. The N_TAPS taps of one region form a
// chain whose single output line feeds one delay monitoring element (DME). Configuration bits
// choose which branch is live during a measurement window; selecting one branch at a time lets
// the DME observe the region's switch-matrix nodes one after the other without re-routing.
//
// Logic: a branch-enable register (the configuration bits) loaded by cfg_load, and the AND-OR
// merge of the enabled branches onto the output line. A new enable pattern is accepted only if
// at most one bit is set, so two branches can never be merged onto the line; a rejected load
// keeps the old pattern and raises cfg_err until the next load. The DCN issues cfg_load only
// between measurement windows. The tap inputs arrive already buffered (the BUFG of each branch
// is part of the routing model).
//
// Timing: en_q changes one clock after cfg_load; dt_out is combinational from tap (it carries
// the analogue timing being measured and must not be re-registered).
`timescale 1ps/1ps
module dt_chain #(
  parameter int unsigned N_TAPS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_load,
  input  logic [N_TAPS-1:0] cfg_en,
  input  logic [N_TAPS-1:0] tap,
  output logic [N_TAPS-1:0] en_q,
  output logic              cfg_err,
  output logic              dt_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q    <= '0;
      cfg_err <= 1'b0;
    end else if (cfg_load) begin
      if ((cfg_en & (cfg_en - 1'b1)) == '0) begin  // at most one bit set
        en_q    <= cfg_en;
        cfg_err <= 1'b0;
      end else begin
        cfg_err <= 1'b1;
      end
    end
  end

  assign dt_out = |(tap & en_q);

  a_single_branch: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(en_q));

endmodule
