// route_fabric_model -- BEHAVIOURAL MODEL (not synthesizable) of one monitored region of the
// FPGA routing fabric: a functional net crossing a sequence of switch-matrix blocks (SBs), the
// observation branches taken at N_TAPS switch-matrix I/O nodes, and the global buffer (BUFG)
// that terminates each branch.
//
// Routing delay is a physical property of the silicon, so it cannot be logic; this model turns
// it into event timing so that the sampling circuitry can be simulated. Each edge of `src`
// reaches tap i (i = 0 nearest the source) after
//     BASE_PS + (i+1)*SB_PS                       nominal traversal of i+1 switch matrices
//   + pdn_load*PDN_PS                             supply droop: the same for every tap/region
//   + npert*PERT_PS*LOC                           parasitic attachments on this region's branch
//   + U(0, (i+1)*JIT_PS + npert*PERT_JIT_PS)      uniform timing spread
// where npert is the number of enabled parasitic attachments and LOC = 1 + (7*REGION mod 4)
// is a fixed, region-dependent sensitivity. This reproduces the qualitative behaviour the
// architecture is built to tell apart: deeper taps are later and wider; PDN load shifts all
// regions rigidly; routing perturbation shifts regions by different amounts and widens the
// spread. All constants are this model's own choices, kept so that the worst-case delay stays
// below one 300 MHz period (3.33 ns).
//
// Interface: src (the tapped functional net), pert (thermometer, attachments enabled by the
// routing configurator), pdn_load (activity level of the stressor), tap (branch outputs, after
// the BUFG). Requires a 1 ps time precision.
`timescale 1ps/1ps
module route_fabric_model #(
  parameter int unsigned N_TAPS      = 8,
  parameter int unsigned PERT_N      = 4,
  parameter int unsigned LOAD_W      = 5,
  parameter int unsigned REGION      = 0,
  parameter int unsigned BASE_PS     = 300,
  parameter int unsigned SB_PS       = 150,
  parameter int unsigned JIT_PS      = 20,
  parameter int unsigned PERT_PS     = 40,
  parameter int unsigned PERT_JIT_PS = 60,
  parameter int unsigned PDN_PS      = 20
) (
  input  logic              src,
  input  logic [PERT_N-1:0] pert,
  input  logic [LOAD_W-1:0] pdn_load,
  output logic [N_TAPS-1:0] tap
);

  localparam int unsigned LOC = 1 + ((7 * REGION) % 4);

  task automatic wait_ps(input int unsigned d);
    for (int b = 0; b < 16; b++) begin
      if (d[b]) begin
        case (b)
          0: #1;     1: #2;     2: #4;     3: #8;
          4: #16;    5: #32;    6: #64;    7: #128;
          8: #256;   9: #512;   10: #1024; 11: #2048;
          12: #4096; 13: #8192; 14: #16384; default: #32768;
        endcase
      end
    end
  endtask

  initial tap = '0;

  always @(src) begin
    automatic logic        v     = src;
    automatic int unsigned npert = $countones(pert);
    for (int i = 0; i < N_TAPS; i++) begin
      automatic int          k    = i;
      automatic int unsigned jmax = (k + 1) * JIT_PS + npert * PERT_JIT_PS;
      automatic int unsigned d    = BASE_PS + (k + 1) * SB_PS + int'(pdn_load) * PDN_PS
                                  + npert * PERT_PS * LOC + $urandom_range(jmax, 0);
      fork
        begin
          wait_ps(d);
          tap[k] = v;
        end
      join_none
    end
  end

endmodule
