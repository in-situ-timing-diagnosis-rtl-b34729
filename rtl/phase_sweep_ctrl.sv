// phase_sweep_ctrl -- phase-sweep control of the delay and control network (DCN).
//
// Holds the phase index register that selects the shift of the DMEs' sampling clock. A sweep
// loads the start index, and after every completed measurement window the index advances by
// the programmed step until the next step would pass the stop index. Because the register is
// written only on `load` and `step`, which the DCN issues strictly between windows, all
// samples of one window see the same phase and every DME sees the same phase at once.
//
// Interface: load/step are one-cycle strobes (load wins); phase_start/phase_stop/phase_step
// are the sweep range and step (a step of 0 is treated as 1). `last` is high while the current
// index is the final one of the sweep. Timing: phase changes one clock after the strobe.
`timescale 1ps/1ps
module phase_sweep_ctrl #(
  parameter int unsigned PHASE_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic               step,
  input  logic [PHASE_W-1:0] phase_start,
  input  logic [PHASE_W-1:0] phase_stop,
  input  logic [PHASE_W-1:0] phase_step,
  output logic [PHASE_W-1:0] phase,
  output logic               last
);

  logic [PHASE_W-1:0] inc;
  logic [PHASE_W:0]   next_full;

  assign inc       = (phase_step == '0) ? PHASE_W'(1) : phase_step;
  assign next_full = {1'b0, phase} + {1'b0, inc};
  assign last      = (phase >= phase_stop) || (next_full > {1'b0, phase_stop});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               phase <= '0;
    else if (load)            phase <= phase_start;
    else if (step && !last)   phase <= next_full[PHASE_W-1:0];
  end

endmodule
