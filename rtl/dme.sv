// dme -- delay monitoring element: turns the timing of one tapped routing node into counts.
//
// Principle. The observed signal is launched by the functional clock and arrives at the DME
// after the routing delay D. A sampling flip-flop clocked by a phase-shifted copy of the
// functional clock (shift phi, set by the DCN's phase index) captures it. If phi > D the
// sample already holds the new value; if phi < D it still holds the previous one. A second
// flip-flop, clocked by the next functional edge, captures the settled new value and serves as
// the reference. A sample that differs from the reference is an incorrect sample; over a
// window the error count, divided by the number of observed transitions (correct plus
// incorrect samples), is the bit-error rate at that phase. As phi
// sweeps across the transition region the error count traces the probability that the
// transition arrives after the sampling edge, i.e. the delay distribution of that node.
// No knowledge of the signal's logical meaning is needed, only transitions.
//
// Structure: as in the reference design, a phase-controlled sampling flip-flop and
// accumulation counters (correct and incorrect samples). The branch selection that acts as
// the DME's input multiplexer sits in the DT chain in front of it (one line arrives here); the
// DME keeps the tap identifier from its control word so that its summary names the tap.
// Own choices: the reference flip-flop, the retiming stage, counting only cycles in which the
// signal changed (a cycle without a transition carries no timing information, and counting it
// would make the rate depend on the data's toggle rate), 16-bit saturating counters, and the
// nibble-serial report.
//
// Interface (diag_pkg): ctrl = {meas_en, rpt_rd, tap_sel} (5 bits), rpt = 4-bit nibble.
// Timing: sample at clk_samp; retimed into clk at the next functional edge (valid because the
// shift stays below one period); compared one cycle later. meas_en is delayed by two cycles to
// line up with the comparison, so the counters cover exactly as many cycles as meas_en was high.
// Three cycles after meas_en falls the summary {tap(4), err_cnt, ok_cnt} (36 bits) is frozen
// in a shift register; rpt shows its top nibble and each rpt_rd strobe moves to the next one.
`timescale 1ps/1ps
module dme
  import diag_pkg::*;
(
  input  logic      clk,       // instrumentation clock (same source as the functional clock)
  input  logic      rst_n,
  input  logic      clk_samp,  // phase-shifted sampling clock
  input  logic      dt_in,     // line from the DT chain
  input  dme_ctrl_t ctrl,
  output dme_rpt_t  rpt
);

  // Sampling flip-flop in the shifted clock domain.
  logic samp_q;
  always_ff @(posedge clk_samp or negedge rst_n) begin
    if (!rst_n) samp_q <= 1'b0;
    else        samp_q <= dt_in;
  end

  // Retiming of the sample and reference capture of the settled value.
  logic samp_rt, ref_q, ref_prev, err_bit, trans;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      samp_rt  <= 1'b0;
      ref_q    <= 1'b0;
      ref_prev <= 1'b0;
    end else begin
      samp_rt  <= samp_q;
      ref_q    <= dt_in;
      ref_prev <= ref_q;
    end
  end
  assign trans   = ref_q ^ ref_prev;   // the signal changed in this launch cycle
  assign err_bit = samp_rt ^ ref_q;

  // Window alignment and counters.
  logic             men_d1, men_d2, men_d3;
  logic [CNT_W-1:0] err_cnt, ok_cnt;
  logic [3:0]       tap_id;
  logic [SUM_W-1:0] sum_sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      men_d1  <= 1'b0;
      men_d2  <= 1'b0;
      men_d3  <= 1'b0;
      err_cnt <= '0;
      ok_cnt  <= '0;
      tap_id  <= '0;
      sum_sh  <= '0;
    end else begin
      men_d1 <= ctrl.meas_en;
      men_d2 <= men_d1;
      men_d3 <= men_d2;
      if (ctrl.meas_en && !men_d1) tap_id <= {1'b0, ctrl.tap_sel};
      if (men_d1 && !men_d2) begin
        err_cnt <= '0;
        ok_cnt  <= '0;
      end else if (men_d2 && trans) begin
        if (err_bit) begin
          if (err_cnt != '1) err_cnt <= err_cnt + 1'b1;
        end else begin
          if (ok_cnt != '1)  ok_cnt  <= ok_cnt + 1'b1;
        end
      end
      if (men_d3 && !men_d2)  sum_sh <= {tap_id, err_cnt, ok_cnt};
      else if (ctrl.rpt_rd)   sum_sh <= sum_sh << 4;
    end
  end

  assign rpt = sum_sh[SUM_W-1 -: 4];

endmodule
