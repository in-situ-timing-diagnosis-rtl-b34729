// timing_data_processor -- first stage of the diagnosis controller: rebuilds, for every DME,
// the bit-error-rate (BER) versus phase profile of the current sweep from the packets.
//
// The DME counts, among the transitions of a window, the incorrect samples (err, sample older
// than the settled value) and the correct ones (ok). Their ratio
//     b(phi) = err / (err + ok)        (Q12, computed here with one combinational divide)
// is the probability that the transition arrives after the sampling edge; it falls from 1 to
// 0 as the sampling phase phi passes the arrival time. The drop between two consecutive phase
// points,
//     p(phi) = b(phi_prev) - b(phi),
// is the fraction of transitions whose arrival lay in (phi_prev, phi]. p(.) is therefore a
// histogram of the node's delay. Instead of storing every profile, the processor keeps per
// DME the running moment sums S0 = sum p, S1 = sum p*phi, S2 = sum p*phi^2 (signed, so noise
// that makes p negative is kept consistent) from which the BER analyzer derives mean and
// spread. In addition, the full BER profile of one DME chosen by prof_sel is stored in a
// 256 x 16-bit memory (a single block RAM) for readout. The per-DME sums reduce the rest.
// The streaming reduction and the single stored profile are this design's own choices.
//
// It also checks the aggregator's packet marker and sequence numbers and counts records.
// Interface: clear (strobe, start of a sweep), pkt_valid/pkt_ready (always ready: one packet
// per cycle), rd_idx -> rd_s0/s1/s2 (combinational read), prof_addr -> prof_data.
// Timing: a packet accepted in cycle t is included in the sums after the edge ending t.
`timescale 1ps/1ps
module timing_data_processor
  import diag_pkg::*;
#(
  parameter int unsigned NUM_DME = 32,
  parameter int unsigned SW      = 48
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                pkt_valid,
  output logic                pkt_ready,
  input  meas_pkt_t           pkt,
  input  logic [ID_W-1:0]     prof_sel,
  input  logic [PHASE_W-1:0]  prof_addr,
  output logic [CNT_W-1:0]    prof_data,
  input  logic [ID_W-1:0]     rd_idx,
  output logic signed [SW-1:0] rd_s0,
  output logic signed [SW-1:0] rd_s1,
  output logic signed [SW-1:0] rd_s2,
  output logic [31:0]         rec_count,
  output logic                seq_err
);

  logic [12:0]         prev_ber [NUM_DME];
  logic                seen     [NUM_DME];
  logic signed [SW-1:0] s0 [NUM_DME];
  logic signed [SW-1:0] s1 [NUM_DME];
  logic signed [SW-1:0] s2 [NUM_DME];
  logic [CNT_W-1:0]    prof_mem [2**PHASE_W];
  logic [15:0]         exp_seq;
  logic                seq_init;

  assign pkt_ready = 1'b1;

  localparam int unsigned IW = (NUM_DME > 1) ? $clog2(NUM_DME) : 1;
  localparam int unsigned QB = 12;           // fraction bits of the per-phase BER
  logic                 take;
  logic [ID_W-1:0]      id;
  logic [CNT_W:0]       tot;
  logic [QB:0]          ber;
  logic signed [QB+1:0] p;
  logic signed [SW-1:0] p_x, ph_x;

  logic [IW-1:0]        ix;
  assign id   = pkt.rec.dme_id;
  assign ix   = id[IW-1:0];
  assign take = pkt_valid && (32'(id) < NUM_DME);
  assign tot  = {1'b0, pkt.rec.err_cnt} + {1'b0, pkt.rec.ok_cnt};
  assign ber  = (tot == '0) ? '0 : (QB+1)'(({pkt.rec.err_cnt, {QB{1'b0}}}) / (CNT_W+QB)'(tot));
  assign p    = $signed({1'b0, prev_ber[ix]}) - $signed({1'b0, ber});
  assign p_x  = SW'(p);
  assign ph_x = SW'({1'b0, pkt.rec.phase});

  always_ff @(posedge clk) begin
    if (pkt_valid && (pkt.rec.dme_id == prof_sel)) prof_mem[pkt.rec.phase] <= pkt.rec.err_cnt;
  end
  assign prof_data = prof_mem[prof_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_DME; i++) begin
        prev_ber[i] <= '0;
        seen[i]     <= 1'b0;
        s0[i] <= '0;
        s1[i] <= '0;
        s2[i] <= '0;
      end
      rec_count <= '0;
      exp_seq   <= '0;
      seq_init  <= 1'b0;
      seq_err   <= 1'b0;
    end else if (clear) begin
      for (int i = 0; i < NUM_DME; i++) begin
        seen[i] <= 1'b0;
        s0[i] <= '0;
        s1[i] <= '0;
        s2[i] <= '0;
      end
      rec_count <= '0;
      seq_err   <= 1'b0;
    end else if (pkt_valid) begin
      rec_count <= rec_count + 1'b1;
      exp_seq   <= pkt.seq + 1'b1;
      seq_init  <= 1'b1;
      if ((seq_init && pkt.seq != exp_seq) || pkt.magic != PKT_MAGIC) seq_err <= 1'b1;
      if (take) begin
        prev_ber[ix] <= ber;
        seen[ix]     <= 1'b1;
        if (seen[ix]) begin
          s0[ix] <= s0[ix] + p_x;
          s1[ix] <= s1[ix] + p_x * ph_x;
          s2[ix] <= s2[ix] + p_x * ph_x * ph_x;
        end
      end
    end
  end

  assign rd_s0 = s0[rd_idx[IW-1:0]];
  assign rd_s1 = s1[rd_idx[IW-1:0]];
  assign rd_s2 = s2[rd_idx[IW-1:0]];

endmodule
