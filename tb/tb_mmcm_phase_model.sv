// tb_mmcm_phase_model -- checks that every input clock edge reappears at the output exactly
// phase*18 ps later, for several phase indices including shifts beyond half a period.
`timescale 1ps/1ps
module tb_mmcm_phase_model;
  logic clk = 1'b0;
  always #1667 clk = ~clk;
  logic [7:0] phase;
  logic clk_out;

  mmcm_phase_model dut (.clk_in(clk), .phase, .clk_out);

  int checks = 0, failures = 0;
  time t_in, t_out;
  int ph_list [6] = '{0, 1, 10, 60, 100, 184};

  initial begin
    phase = 0;
    foreach (ph_list[j]) begin
      phase = 8'(ph_list[j]);
      repeat (4) @(posedge clk);       // old edges drain
      for (int n = 0; n < 5; n++) begin
        @(posedge clk); t_in = $time;
        @(posedge clk_out); t_out = $time;
        // expected position of this output edge: the input edge at t_in shifted, or the one
        // before it when the shift exceeds the wait
        checks++;
        if (((t_out - t_in) % 3334) != (ph_list[j] * 18) % 3334) begin
          failures++;
          $display("FAIL phase %0d: offset %0t", ph_list[j], t_out - t_in);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
