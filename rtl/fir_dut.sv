// fir_dut -- streaming FIR filter used as the functional design under test.
//
// The monitored routing belongs to this filter: it is the realistic, continuously toggling user
// design whose routed nets the delay taps observe. The filter takes one signed DW-bit sample per
// clock and produces one output per clock, y[n] = sum_k coef[k] * x[n-k], k = 0..TAPS-1.
// The defaults (64 taps, 16-bit samples and coefficients, one sample per cycle) are the
// configuration of the reference implementation.
//
// Structure (this design's own choice; only the function is given by the reference description): transposed direct form. The input
// is registered once; every tap multiplies the registered sample by its coefficient and adds the
// partial sum of the next tap, so each multiplier/adder pair maps to one DSP slice and the
// critical path does not grow with TAPS. The output is full precision, DW+CW+log2(TAPS) bits.
//
// Interface: coef is a static array input (a coefficient store outside this block holds it).
// obs exposes NUM_OBS internal nets (one low-order bit of evenly spaced partial-sum
// registers) that the routing model carries to the delay-tap chains. Low-order bits of the
// partial sums toggle with pseudo-random activity when the input is pseudo-random.
//
// Timing: latency from x to y is two clock edges (input register, then the tap-0 partial sum).
`timescale 1ps/1ps
module fir_dut #(
  parameter int unsigned TAPS    = 64,
  parameter int unsigned DW      = 16,
  parameter int unsigned CW      = 16,
  parameter int unsigned NUM_OBS = 32,
  localparam int unsigned YW     = DW + CW + $clog2(TAPS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [DW-1:0]  x,
  input  logic signed [CW-1:0]  coef [TAPS],
  output logic signed [YW-1:0]  y,
  output logic [NUM_OBS-1:0]    obs
);

  logic signed [DW-1:0] x_q;
  logic signed [YW-1:0] acc [TAPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0;
      for (int i = 0; i < TAPS; i++) acc[i] <= '0;
    end else begin
      x_q <= x;
      for (int i = 0; i < TAPS - 1; i++)
        acc[i] <= acc[i+1] + YW'(x_q) * YW'(coef[i]);
      acc[TAPS-1] <= YW'(x_q) * YW'(coef[TAPS-1]);
    end
  end

  assign y = acc[0];

  // Observed nets: bit (r mod 4) of partial-sum register r*TAPS/NUM_OBS.
  always_comb begin
    for (int r = 0; r < NUM_OBS; r++)
      obs[r] = acc[(r * TAPS) / NUM_OBS][r % 4];
  end

endmodule
