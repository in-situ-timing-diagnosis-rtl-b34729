// tb_delay_data_aggregator -- self-checking test of the record FIFO / packetiser.
//
// A random producer pushes records, a random consumer pops packets with random backpressure.
// A queue in the testbench is the reference: every packet must carry the marker byte, the
// next sequence number and the oldest record not yet delivered. The FIFO is shrunk to 8
// entries and the consumer is stalled for a stretch so that the full condition (in_ready low)
// is reached; `level` is checked against the queue length every cycle.
`timescale 1ps/1ps
module tb_delay_data_aggregator;
  import diag_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  meas_rec_t in_rec;
  meas_pkt_t out_pkt;
  logic [$clog2(DEPTH):0] level;

  int checks = 0, failures = 0, full_seen = 0, pops = 0;
  meas_rec_t q[$];
  logic [15:0] exp_seq = '0;

  delay_data_aggregator #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    in_valid = 1'b0; out_ready = 1'b0; in_rec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      in_rec    = {$urandom, $urandom};
      // stall the consumer for a while in the middle to fill the FIFO
      out_ready = (cyc > 500 && cyc < 600) ? 1'b0 : (($urandom % 2) != 0);
      check(int'(level) == q.size(), "level");
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (!in_ready) full_seen++;
      if (out_valid) begin
        check(out_pkt.magic == PKT_MAGIC, "magic");
        check(out_pkt.seq == exp_seq, "seq");
        check(out_pkt.rec == q[0], "record order");
      end
      @(posedge clk);
      #1;
    end
    check(full_seen > 0, "full reached");
    check(pops > 1000, "throughput");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model updates on the same edge as the DUT
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin void'(q.pop_front()); exp_seq <= exp_seq + 1'b1; pops++; end
    if (in_valid && in_ready) q.push_back(in_rec);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
