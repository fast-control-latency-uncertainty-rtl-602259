// tb_tdc_sweep -- characterisation sweep of the TDC through the phase-shift
// PLL, as done on the hardware: with a stable recovered clock, the sampling
// clock phi is moved through one full cycle in 120 steps of 200 ps; at each
// step the phase monitor is enabled for a while and <min,max> is recorded,
// then it is disabled to clear.
//
// Checked at every step: max - min is 0 (a noiseless simulation has no
// transition region), and the bin equals floor(((D - step*200 ps) mod 24 ns)
// / 3 ns) for a recovered-clock delay D. Checked over the sweep: every one of
// the eight bins is hit by exactly 15 steps (3 ns / 200 ps), i.e. the code is
// linear. Moving phi later lowers the code; the direction of the published
// sweep is not stated, so only the bin widths are compared with it.
`timescale 1ns/1ps
module tb_tdc_sweep;
  import etof_fc_pkg::*;
  localparam int T = 24000;
  localparam int D = 10100;   // recovered-clock delay, away from bin borders

  logic ref_clk = 1'b0, rst_n = 1'b0;
  logic ps_step = 1'b0, ps_done;
  logic [6:0] pll_phase;
  logic phi, phi_180, rx_clk, mon_en = 1'b0;
  logic [3:0] df_clk;
  logic [7:0] v;
  logic v_valid, seen;
  logic [15:0] rxd;
  int unsigned idx;
  bin_t value, min_val, max_val;
  int checks = 0, failures = 0;
  int hist[8];

  initial forever #(T / 2 * 1ps) ref_clk = ~ref_clk;

  tlk1501_model u_serdes (.tx_clk(ref_clk), .txd(16'h0), .enable(rst_n), .delta_ps(D),
                          .force_idx(0), .idx(idx), .rx_clk(rx_clk), .rxd(rxd));
  pll_phase_shift u_pll (.ref_clk, .rst_n, .ps_step, .ps_up(1'b1), .ps_done,
                         .phase(pll_phase), .phi, .phi_180);
  pll_x2_4phase u_x2 (.clk_in(phi), .df_clk(df_clk));
  tdc u_tdc (.rst_n, .work_clk(phi), .df_clk, .hit_src_clk(rx_clk), .v, .v_valid);
  phase_monitor u_mon (.clk(phi), .rst_n, .enable(mon_en), .gate(1'b1), .v, .v_valid,
                       .value, .min_val, .max_val, .seen);

  initial begin
    int exp_bin, d;
    foreach (hist[b]) hist[b] = 0;
    repeat (2) @(posedge ref_clk);
    rst_n = 1'b1;
    repeat (8) @(posedge ref_clk);
    for (int s = 0; s < 120; s++) begin
      mon_en = 1'b1;
      repeat (40) @(posedge ref_clk);
      mon_en = 1'b0;
      #1ps;
      d = (D - s * 200) % T;
      if (d < 0) d += T;
      exp_bin = d / 3000;
      checks++;
      if (!seen || min_val != max_val || int'(min_val) != exp_bin) begin
        failures++;
        $display("FAIL step %0d: <min,max> = <%0d,%0d> seen %0d, expected bin %0d", s, min_val, max_val, seen, exp_bin);
      end
      hist[min_val]++;
      repeat (4) @(posedge ref_clk);
      // next step
      @(posedge ref_clk); ps_step <= 1'b1;
      @(posedge ref_clk); ps_step <= 1'b0;
      while (!ps_done) @(posedge ref_clk);
      repeat (4) @(posedge ref_clk);
    end
    for (int b = 0; b < 8; b++) begin
      checks++;
      if (hist[b] != 15) begin failures++; $display("FAIL bin %0d hit by %0d steps", b, hist[b]); end
    end
    checks++;
    if (pll_phase != 0) begin failures++; $display("FAIL phase did not wrap after 120 steps"); end
    $display("steps per bin: %0d %0d %0d %0d %0d %0d %0d %0d",
             hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5ms);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
