// pdn_stressor -- controllable on-chip switching-activity source for PDN stress experiments.
//
// Supply droop is provoked by co-locating the design under test with a block of high-toggle
// logic that draws dynamic current. Following the reference design, the stressor is made of
// XOR-ed LFSR networks and multiply-accumulate units, clocked with the DUT clock, and its
// intensity is set by (i) a global enable and (ii) the number of replicated slices allowed to
// toggle. A slice that is not active holds its state, so it draws no dynamic current.
//
// Each slice (own choice of sizes): two 32-bit Galois LFSRs with different taps and seeds,
// whose XOR feeds a 16x16 signed multiply into a 40-bit accumulator. `signature` is the XOR of
// all accumulators and LFSRs, registered, so that synthesis cannot remove the logic.
// `load` is the registered number of slices actually toggling; it is the activity level that
// the routing behavioural model turns into a supply-induced delay increase.
//
// Timing: everything is registered; `load` follows en/n_active one cycle later.
`timescale 1ps/1ps
module pdn_stressor #(
  parameter int unsigned NUM_SLICES = 16,
  localparam int unsigned LW = $clog2(NUM_SLICES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [LW-1:0] n_active,
  output logic [LW-1:0] load,
  output logic          signature
);

  localparam logic [31:0] POLY_A = 32'h8020_0003;  // Galois (right-shift) feedback mask
  localparam logic [31:0] POLY_B = 32'h8000_0EA6;  // second feedback mask

  logic [31:0]        lfsr_a [NUM_SLICES];
  logic [31:0]        lfsr_b [NUM_SLICES];
  logic signed [39:0] mac    [NUM_SLICES];
  logic [NUM_SLICES-1:0] active;

  always_comb begin
    for (int s = 0; s < NUM_SLICES; s++)
      active[s] = en && (s < int'(n_active));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SLICES; s++) begin
        lfsr_a[s] <= 32'hACE1_0000 ^ 32'(s + 1);
        lfsr_b[s] <= 32'h1234_5678 ^ (32'(s) << 8);
        mac[s]    <= '0;
      end
    end else begin
      for (int s = 0; s < NUM_SLICES; s++) begin
        if (active[s]) begin
          lfsr_a[s] <= lfsr_a[s][0] ? ((lfsr_a[s] >> 1) ^ POLY_A)
                                    : (lfsr_a[s] >> 1);
          lfsr_b[s] <= lfsr_b[s][0] ? ((lfsr_b[s] >> 1) ^ POLY_B)
                                    : (lfsr_b[s] >> 1);
          mac[s]    <= mac[s] + 40'($signed(lfsr_a[s][15:0] ^ lfsr_b[s][31:16])) *
                                    40'($signed(lfsr_b[s][15:0]));
        end
      end
    end
  end

  logic sig_d;
  always_comb begin
    sig_d = 1'b0;
    for (int s = 0; s < NUM_SLICES; s++) sig_d ^= (^mac[s]) ^ (^lfsr_a[s]) ^ (^lfsr_b[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load      <= '0;
      signature <= 1'b0;
    end else begin
      load      <= LW'($countones(active));
      signature <= sig_d;
    end
  end

endmodule
