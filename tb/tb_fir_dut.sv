// tb_fir_dut -- checks the FIR filter against a reference convolution at the default size
// (64 taps, 16-bit): random coefficients, random samples every cycle, output compared every
// cycle with sum coef[k]*x[n-k] for the two-edge latency; obs[0] must be bit 0 of y.
`timescale 1ps/1ps
module tb_fir_dut;
  localparam int TAPS = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1667 clk = ~clk;

  logic signed [15:0] x;
  logic signed [15:0] coef [TAPS];
  logic signed [37:0] y;
  logic [31:0] obs;

  fir_dut dut (.clk, .rst_n, .x, .coef, .y, .obs);

  int checks = 0, failures = 0;
  logic signed [15:0] xh [TAPS+2];

  initial begin
    for (int k = 0; k < TAPS; k++) coef[k] = 16'($urandom);
    coef[0] = 16'sh7fff; coef[1] = -16'sh8000;     // extremes
    for (int i = 0; i < TAPS + 2; i++) xh[i] = 0;
    x = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n > TAPS + 4) begin
        automatic longint acc = 0;
        for (int k = 0; k < TAPS; k++) acc += longint'(coef[k]) * longint'(xh[k+1]);
        checks++;
        if (y != 38'(acc)) begin
          failures++;
          if (failures < 5) $display("FAIL n=%0d y=%0d exp=%0d", n, y, acc);
        end
        checks++;
        if (obs[0] != y[0]) failures++;
      end
      x = (n % 97 == 0) ? -16'sh8000 : 16'($urandom);
      for (int i = TAPS + 1; i > 0; i--) xh[i] = xh[i-1];
      xh[0] = x;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
