// seq_divider -- unsigned restoring divider, one quotient bit per clock.
//
// Helper of the BER analyzer, whose statistics are computed off the critical path, so a small
// serial divider is preferred to a combinational one. quot = num / den (integer part);
// division by zero returns all ones.
// Interface: start (strobe, accepted when not busy), busy, done (one-cycle strobe with the
// result valid from then until the next start). Timing: done rises W+1 cycles after start.
`timescale 1ps/1ps
module seq_divider #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot
);

  logic [W-1:0]   q, d;
  logic [W:0]     r;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]     r_sh, r_sub;

  assign r_sh  = {r[W-1:0], q[W-1]};
  assign r_sub = r_sh - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q    <= '0;
      d    <= '0;
      r    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      quot <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        q    <= num;
        d    <= den;
        r    <= '0;
        cnt  <= ($clog2(W+1))'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (r_sub[W]) begin
          r <= r_sh;
          q <= {q[W-2:0], 1'b0};
        end else begin
          r <= r_sub;
          q <= {q[W-2:0], 1'b1};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quot <= (d == '0) ? '1 : (r_sub[W] ? {q[W-2:0], 1'b0} : {q[W-2:0], 1'b1});
        end
      end
    end
  end

endmodule
