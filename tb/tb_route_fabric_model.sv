// tb_route_fabric_model -- measures the arrival time of each edge at every tap and checks it
// against the delay formula: nominal (tap depth), with PDN load, with perturbation (region 1,
// LOC = 4); the earliest/latest arrival must lie inside [nominal, nominal + jitter range] and
// the observed spread must grow with perturbation.
`timescale 1ps/1ps
module tb_route_fabric_model;
  localparam int NT = 8;
  logic src = 1'b0;
  logic [3:0] pert;
  logic [4:0] pdn_load;
  logic [NT-1:0] tap;

  route_fabric_model #(.N_TAPS(NT), .REGION(1)) dut (.src, .pert, .pdn_load, .tap);

  int checks = 0, failures = 0;
  time t0;
  int dmin [NT], dmax [NT];

  task automatic measure(input int edges);
    for (int i = 0; i < NT; i++) begin dmin[i] = 1 << 30; dmax[i] = 0; end
    for (int e = 0; e < edges; e++) begin
      logic [NT-1:0] seen;
      #5000;
      src = ~src; t0 = $time; seen = '0;
      while (seen != '1) begin
        @(tap);
        for (int i = 0; i < NT; i++) if (!seen[i] && tap[i] == src) begin
          seen[i] = 1'b1;
          if (int'($time - t0) < dmin[i]) dmin[i] = int'($time - t0);
          if (int'($time - t0) > dmax[i]) dmax[i] = int'($time - t0);
        end
      end
    end
  endtask

  task automatic expect_range(input int npert, input int load, input string what);
    for (int i = 0; i < NT; i++) begin
      int lo = 300 + (i + 1) * 150 + load * 20 + npert * 40 * 4;
      int hi = lo + (i + 1) * 20 + npert * 60;
      checks++;
      if (dmin[i] < lo || dmax[i] > hi) begin
        failures++;
        $display("FAIL %s tap %0d: [%0d,%0d] not in [%0d,%0d]", what, i, dmin[i], dmax[i], lo, hi);
      end
    end
  endtask

  initial begin
    int spread0, spread4;
    pert = 0; pdn_load = 0;
    measure(60);
    expect_range(0, 0, "nominal");
    spread0 = dmax[0] - dmin[0];
    pdn_load = 5'd16;
    measure(60);
    expect_range(0, 16, "pdn");
    pdn_load = 0; pert = 4'b1111;
    measure(60);
    expect_range(4, 0, "pert");
    spread4 = dmax[0] - dmin[0];
    checks++;
    if (spread4 <= spread0 + 60) begin failures++; $display("FAIL spread %0d vs %0d", spread4, spread0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
