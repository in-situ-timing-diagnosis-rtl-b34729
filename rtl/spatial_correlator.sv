// spatial_correlator -- third analysis stage of the diagnosis controller: correlates the
// timing shifts of all monitored locations with those of one reference location across
// repeated measurement campaigns.
//
// After each measurement campaign the controller strobes `sample`. The correlator first reads
// the reference location's mean shift r from the BER analyzer, then walks over all locations
// and, for every location whose shift x is valid (and when r is valid), adds to that
// location's running sums: n += 1, sx += x, sxx += x^2, sr += r, srr += r^2, sxr += x*r.
// These are exactly the terms of the Pearson correlation coefficient between the location and
// the reference over the campaigns seen since `clear`; the host forms
//     rho = (n*sxr - sx*sr) / sqrt((n*sxx - sx^2) * (n*srr - sr^2))
// for each location, which gives one row of a spatial correlation map. A supply-driven
// change moves every location together (rho near 1 everywhere); upsets that hit different
// locations in different campaigns give low or negative rho. Keeping sums instead of the
// coefficient leaves the square root and the final division to the host; this split, and
// the choice of the mean shift as the correlated quantity, are this design's own.
//
// Interface: clear (strobe, also resets the reference), ref_idx (reference location),
// sample (strobe), rd_idx -> rd_x/rd_ok (analyzer read port, combinational), q_idx -> q_sums
// (host read port, combinational), busy, done (strobe). Timing: NUM_DME + 2 cycles per sample.
`timescale 1ps/1ps
module spatial_correlator
  import diag_pkg::*;
#(
  parameter int unsigned NUM_DME = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [ID_W-1:0]    ref_idx,
  input  logic               sample,
  output logic [ID_W-1:0]    rd_idx,
  input  logic signed [31:0] rd_x,
  input  logic               rd_ok,
  input  logic [ID_W-1:0]    q_idx,
  output corr_sums_t         q_sums,
  output logic               busy,
  output logic               done
);

  localparam int unsigned IW = (NUM_DME > 1) ? $clog2(NUM_DME) : 1;

  corr_sums_t sums [NUM_DME];

  typedef enum logic [1:0] {K_IDLE, K_REF, K_ACC} kstate_e;
  kstate_e state;

  logic [IW-1:0]            idx;
  logic signed [31:0]       r_q;
  logic                     r_ok;
  logic signed [CORR_W-1:0] x_w, r_w;

  assign rd_idx = (state == K_REF) ? ref_idx : ID_W'(idx);
  assign x_w    = CORR_W'(rd_x);
  assign r_w    = CORR_W'(r_q);
  assign busy   = (state != K_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= K_IDLE;
      idx   <= '0;
      r_q   <= '0;
      r_ok  <= 1'b0;
      done  <= 1'b0;
      for (int i = 0; i < NUM_DME; i++) sums[i] <= '0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        state <= K_IDLE;
        for (int i = 0; i < NUM_DME; i++) sums[i] <= '0;
      end else begin
        case (state)
          K_IDLE: if (sample) state <= K_REF;
          K_REF: begin
            r_q   <= rd_x;
            r_ok  <= rd_ok;
            idx   <= '0;
            state <= K_ACC;
          end
          K_ACC: begin
            if (rd_ok && r_ok) begin
              sums[idx].n   <= sums[idx].n + 16'd1;
              sums[idx].sx  <= sums[idx].sx + x_w;
              sums[idx].sxx <= sums[idx].sxx + x_w * x_w;
              sums[idx].sr  <= sums[idx].sr + r_w;
              sums[idx].srr <= sums[idx].srr + r_w * r_w;
              sums[idx].sxr <= sums[idx].sxr + x_w * r_w;
            end
            if (32'(idx) == NUM_DME - 1) begin
              state <= K_IDLE;
              done  <= 1'b1;
            end else begin
              idx <= idx + 1'b1;
            end
          end
          default: state <= K_IDLE;
        endcase
      end
    end
  end

  assign q_sums = sums[q_idx[IW-1:0]];

endmodule
