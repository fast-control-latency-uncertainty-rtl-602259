// tb_pll_phase_shift -- self-checking testbench of the phase-shift PLL model.
//
// Steps the phase up to random targets (and down once) and checks after each
// move that ps_done came two cycles after ps_step, that the phase counter
// wraps at 120 steps and that the rising edge of phi lies phase * 200 ps
// after the rising edge of ref_clk, with phi_180 its inverse.
`timescale 1ns/1ps
module tb_pll_phase_shift;
  logic ref_clk = 1'b0, rst_n = 1'b0;
  logic ps_step = 1'b0, ps_up = 1'b1, ps_done;
  logic [6:0] phase;
  logic phi, phi_180;
  int checks = 0, failures = 0;
  int expected = 0;
  realtime t_ref;

  initial forever #12ns ref_clk = ~ref_clk;
  always @(posedge ref_clk) t_ref = $realtime;

  pll_phase_shift dut (.ref_clk, .rst_n, .ps_step, .ps_up, .ps_done, .phase, .phi, .phi_180);

  task automatic step(logic up);
    int lat;
    @(posedge ref_clk);
    ps_step <= 1'b1; ps_up <= up;
    @(posedge ref_clk);
    ps_step <= 1'b0;
    lat = 1;
    while (!ps_done) begin @(posedge ref_clk); #1ps; lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL done latency %0d", lat); end
    expected = up ? (expected + 1) % 120 : (expected + 119) % 120;
  endtask

  task automatic check_edge();
    realtime d;
    repeat (3) @(posedge ref_clk);
    @(posedge phi);
    d = $realtime - t_ref;
    if (d >= 24.0) d -= 24.0;
    checks++;
    if (int'(phase) != expected || (d - expected * 0.2) > 0.001 || (expected * 0.2 - d) > 0.001) begin
      failures++;
      $display("FAIL phase %0d expected %0d edge %0.3f ns", phase, expected, d);
    end
    #1ps;
    checks++;
    if (phi_180 !== ~phi) begin failures++; $display("FAIL phi_180"); end
  endtask

  initial begin
    repeat (2) @(posedge ref_clk);
    rst_n <= 1'b1;
    check_edge();
    for (int i = 0; i < 8; i++) begin
      int n;
      n = $urandom_range(40, 1);
      repeat (n) step(1'b1);
      check_edge();
    end
    repeat (5) step(1'b0);
    check_edge();
    while (expected != 0) step(1'b1);
    step(1'b0);
    check_edge();
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
