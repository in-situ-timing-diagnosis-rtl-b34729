// delay_data_aggregator -- convergence point between the distributed sensing layer and the
// central analysis.
//
// Receives finished measurement records from the DCN, buffers them in a FIFO so that the DCN
// never has to wait for the controller's processing, and formats each into a uniform packet
// {marker byte, 16-bit sequence number, record}. The sequence number counts packets since
// reset, so a consumer can prove that no record was lost. Only low-rate statistical summaries
// pass through here.
//
// Own choices: FIFO depth (DEPTH, default 64 records, one sweep point of all 32 DMEs fits twice),
// the packet layout, first-word-fall-through output.
//
// Interface: valid/ready on both sides (a transfer happens when both are high in a cycle).
// in_ready is low only when the FIFO is full. `level` is the FIFO occupancy.
// Timing: a record written in cycle t can leave in cycle t+1.
`timescale 1ps/1ps
module delay_data_aggregator
  import diag_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  meas_rec_t in_rec,
  output logic      out_valid,
  input  logic      out_ready,
  output meas_pkt_t out_pkt,
  output logic [AW:0] level
);

  meas_rec_t     mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [15:0]   seq;
  logic          push, pop;

  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_rec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
      seq    <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop) begin
        rd_ptr <= rd_ptr + 1'b1;
        seq    <= seq + 1'b1;
      end
      case ({push, pop})
        2'b10:   level <= level + 1'b1;
        2'b01:   level <= level - 1'b1;
        default: ;
      endcase
    end
  end

  assign out_pkt.magic = PKT_MAGIC;
  assign out_pkt.seq   = seq;
  assign out_pkt.rec   = mem[rd_ptr];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));

endmodule
