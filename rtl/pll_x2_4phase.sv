// pll_x2_4phase -- BEHAVIOURAL MODEL (not synthesizable) of the TDC clock
// generator: an FPGA PLL that doubles the work clock and outputs four phases.
//
// df_clk[i] has half the period of clk_in and rises i * 90 degrees (of the
// doubled clock) after each of its cycles start, i.e. at clk_in rising edge
// + i * PERIOD_PS/8 and again half a clk_in period later. df_clk[0] is
// aligned with clk_in. The frequency doubling and the 0/90/180/270 degree
// outputs follow the published TDC; zero insertion delay is this model's own.
`timescale 1ns/1ps
module pll_x2_4phase #(
  parameter int unsigned PERIOD_PS = 24000
) (
  input  logic       clk_in,
  output logic [3:0] df_clk
);

  // Edges of df_clk[i] come i/8 of a clk_in period after each clk_in edge
  // (rising) and 1/4 period later (falling), taken modulo half a period so
  // that every process waits less than the time to its next trigger.
  localparam int unsigned H = PERIOD_PS / 2;

  initial df_clk = '0;

  for (genvar i = 0; i < 4; i++) begin : g_phase
    localparam int unsigned RISE = i * PERIOD_PS / 8;
    localparam int unsigned FALL = (RISE + PERIOD_PS / 4) % H;
    always begin
      @(clk_in);
      #(RISE * 1ps);
      df_clk[i] <= 1'b1;
    end
    always begin
      @(clk_in);
      #(FALL * 1ps);
      df_clk[i] <= 1'b0;
    end
  end

endmodule
