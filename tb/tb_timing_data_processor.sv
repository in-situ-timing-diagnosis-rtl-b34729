// tb_timing_data_processor -- self-checking test of the BER-profile / moment-sum stage.
//
// For four DMEs the testbench generates a synthetic sweep: at phase phi the error count is
// that of a transition arriving at a DME-specific phase (a smooth ramp), plus random noise.
// Packets are sent interleaved by DME, as the DCN sends them, with consecutive sequence
// numbers. The reference sums S0, S1, S2 are computed here in 64-bit integers from the
// definition (Q12 BER, drop between consecutive phase points, weighted by phi and phi^2).
// Also checked: record count, the stored profile of the selected DME, the sequence-error
// flag on a deliberately skipped sequence number, and clear.
`timescale 1ps/1ps
module tb_timing_data_processor;
  import diag_pkg::*;

  localparam int ND = 4;
  localparam int SW = 48;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic pkt_valid = 1'b0, pkt_ready;
  meas_pkt_t pkt;
  logic [ID_W-1:0] prof_sel = 8'd2, rd_idx = '0;
  logic [PHASE_W-1:0] prof_addr = '0;
  logic [CNT_W-1:0] prof_data;
  logic signed [SW-1:0] rd_s0, rd_s1, rd_s2;
  logic [31:0] rec_count;
  logic seq_err;

  timing_data_processor #(.NUM_DME(ND), .SW(SW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint es0[ND], es1[ND], es2[ND], pb[ND];
  int     prof_ref[256];
  logic [15:0] seq = '0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic send(int id, int ph, int err, int ok);
    @(negedge clk);
    pkt.magic = PKT_MAGIC;
    pkt.seq   = seq;
    pkt.rec   = '0;
    pkt.rec.dme_id  = 8'(id);
    pkt.rec.phase   = 8'(ph);
    pkt.rec.err_cnt = 16'(err);
    pkt.rec.ok_cnt  = 16'(ok);
    pkt_valid = 1'b1;
    seq++;
    @(posedge clk);
    #1 pkt_valid = 1'b0;
  endtask

  initial begin
    automatic int n = 0;
    pkt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < ND; i++) begin es0[i] = 0; es1[i] = 0; es2[i] = 0; pb[i] = -1; end
    for (int ph = 0; ph <= 120; ph += 3) begin
      for (int id = 0; id < ND; id++) begin
        automatic int centre = 30 + 15 * id;
        automatic int tot = 200 + int'($urandom % 50);
        automatic int e;
        if (ph < centre - 10)      e = tot;
        else if (ph > centre + 10) e = 0;
        else                       e = tot * (centre + 10 - ph) / 20;
        if (e > 2 && ($urandom % 2) != 0) e -= 2;
        begin
          automatic longint b = (longint'(e) << 12) / tot;
          if (pb[id] >= 0) begin
            automatic longint p = pb[id] - b;
            es0[id] += p; es1[id] += p * ph; es2[id] += p * ph * ph;
          end
          pb[id] = b;
        end
        if (id == 2) prof_ref[ph] = e;
        send(id, ph, e, tot - e);
        n++;
      end
    end
    @(negedge clk);
    check(rec_count == 32'(n), "record count");
    check(!seq_err, "no sequence error");
    for (int id = 0; id < ND; id++) begin
      rd_idx = 8'(id);
      #1;
      check(rd_s0 == SW'(es0[id]), $sformatf("S0 dme %0d: %0d vs %0d", id, rd_s0, es0[id]));
      check(rd_s1 == SW'(es1[id]), $sformatf("S1 dme %0d", id));
      check(rd_s2 == SW'(es2[id]), $sformatf("S2 dme %0d", id));
    end
    for (int ph = 0; ph <= 120; ph += 3) begin
      prof_addr = 8'(ph);
      #1;
      check(int'(prof_data) == prof_ref[ph], "stored profile");
    end
    // a skipped sequence number must raise the flag
    seq++;
    send(0, 0, 10, 10);
    @(negedge clk);
    check(seq_err, "sequence gap flagged");
    // a wrong marker byte also raises it (after clear)
    clear = 1'b1; @(posedge clk); #1 clear = 1'b0;
    check(!seq_err && rec_count == 0, "clear");
    rd_idx = 0; #1;
    check(rd_s0 == 0 && rd_s1 == 0 && rd_s2 == 0, "sums cleared");
    @(negedge clk);
    pkt.magic = 8'h00; pkt.seq = seq; pkt_valid = 1'b1;
    @(posedge clk); #1 pkt_valid = 1'b0;
    check(seq_err, "bad marker flagged");
    check(pkt_ready, "always ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
