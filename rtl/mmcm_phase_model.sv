// mmcm_phase_model -- BEHAVIOURAL MODEL (not synthesizable) of the clock manager's fine phase
// shifter that produces the DME sampling clock.
//
// On the device the sampling clock is derived from the functional clock by the clock
// management tile, whose programmable phase step is about 15-20 ps; the phase index register
// of the DCN selects the shift. This model reproduces only that behaviour: every edge of
// clk_in appears on clk_out delayed by phase * STEP_PS picoseconds (transport delay, so no
// edge is lost even when the shift exceeds half a period). STEP_PS = 18 ps is a value inside
// the stated 15-20 ps range; the 8-bit index (256 steps, 4.6 ns) is this design's choice and
// covers one full period of a 300 MHz monitored signal.
//
// Interface: clk_in (functional clock), phase (index, change only between measurement
// windows), clk_out (shifted sampling clock). Requires a 1 ps time precision.
`timescale 1ps/1ps
module mmcm_phase_model #(
  parameter int unsigned PHASE_W = 8,
  parameter int unsigned STEP_PS = 18
) (
  input  logic               clk_in,
  input  logic [PHASE_W-1:0] phase,
  output logic               clk_out
);

  // Wait d picoseconds using only constant delays (binary decomposition, d < 65536).
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

  initial clk_out = 1'b0;

  always @(clk_in) begin
    automatic logic        v = clk_in;
    automatic int unsigned d = int'(phase) * STEP_PS;
    fork
      begin
        wait_ps(d);
        clk_out = v;
      end
    join_none
  end

endmodule
