// tb_pll_x2_4phase -- self-checking testbench of the 2x four-phase PLL model.
//
// Checks that each df_clk[i] rises at clk_in + i * 3 ns and again 12 ns
// later (twice the input frequency, 90 degree steps of the doubled clock),
// with a 50 % duty cycle.
`timescale 1ns/1ps
module tb_pll_x2_4phase;
  logic clk_in = 1'b0;
  logic [3:0] df_clk;
  int checks = 0, failures = 0;
  realtime t0;

  initial forever #12ns clk_in = ~clk_in;
  always @(posedge clk_in) t0 = $realtime;

  pll_x2_4phase dut (.clk_in, .df_clk);

  for (genvar i = 0; i < 4; i++) begin : g_chk
    realtime tr;
    always @(posedge df_clk[i]) begin
      realtime d;
      tr = $realtime;
      d = $realtime - t0;
      if ($realtime > 50.0) begin
        checks++;
        if (!((d - i * 3.0 < 0.001 && i * 3.0 - d < 0.001) ||
              (d - (i * 3.0 + 12.0) < 0.001 && (i * 3.0 + 12.0) - d < 0.001))) begin
          failures++;
          $display("FAIL df_clk[%0d] rises %0.3f ns after clk_in", i, d);
        end
      end
    end
    always @(negedge df_clk[i]) begin
      if ($realtime > 50.0) begin
        checks++;
        if ($realtime - tr > 6.001 || $realtime - tr < 5.999) begin
          failures++;
          $display("FAIL df_clk[%0d] high for %0.3f ns", i, $realtime - tr);
        end
      end
    end
  end

  initial begin
    #(2us);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1ms);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
