// tb_phase_align_ctrl -- self-checking testbench of the calibration
// controller (with small reset/lock/measure counts).
//
// A responder answers each ps_step with ps_done two cycles later and keeps
// its own phase count. A phase-monitor stand-in returns a <min,max> pair
// that the testbench sets per scenario; for the reversed-clock scenario it
// changes the pair once the controller has asked for rf. Checked per
// scenario: the number of SerDes power cycles (N_RESETS per measurement), the
// final PLL phase (min*15 + 27 steps, modulo 120), rf, locked, error, that
// mon_gate is only high while the SerDes is enabled, and the calibration time
// in cycles.
`timescale 1ns/1ps
module tb_phase_align_ctrl;
  import etof_fc_pkg::*;
  localparam int N = 5, OFF = 3, LOCK = 4, MEAS = 6, EW = 8;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic serdes_en, mon_en, mon_gate, seen;
  bin_t min_val, max_val;
  logic ps_step, ps_up, ps_done;
  logic rf, busy, locked, error;
  phase_t phase;
  ctrl_state_t state;
  int checks = 0, failures = 0;
  int pll_phase = 0, resets = 0, steps = 0;
  logic [1:0] pend = '0;
  bin_t mn0, mx0, mn1, mx1;
  logic seen_cfg = 1'b1;

  initial forever #12ns clk = ~clk;

  phase_align_ctrl #(.N_RESETS(N), .OFF_CYCLES(OFF), .LOCK_CYCLES(LOCK), .MEAS_CYCLES(MEAS),
                     .EVAL_WAIT(EW), .AUTO_START(1'b0)) dut (
    .clk, .rst_n, .start, .serdes_en, .mon_en, .mon_gate, .min_val, .max_val, .seen,
    .ps_step, .ps_up, .ps_done, .rf, .phase, .busy, .locked, .error, .state);

  // PLL responder
  always_ff @(posedge clk) begin
    pend    <= {pend[0], ps_step};
    ps_done <= pend[1];
    if (ps_step) begin
      pll_phase <= ps_up ? (pll_phase + 1) % 120 : (pll_phase + 119) % 120;
      steps <= steps + 1;
    end
  end
  // monitor stand-in
  assign min_val = rf ? mn1 : mn0;
  assign max_val = rf ? mx1 : mx0;
  assign seen    = seen_cfg;

  logic en_q = 1'b1;
  always @(posedge clk) begin
    en_q <= serdes_en;
    if (en_q && !serdes_en) resets++;
    if (rst_n && mon_gate && !serdes_en) begin
      failures++;
      $display("FAIL mon_gate high with SerDes off");
    end
  end

  task automatic scenario(bin_t a0, bin_t b0, bin_t a1, bin_t b1, logic sn,
                          int exp_phase, logic exp_rf, logic exp_err);
    int cyc, exp_resets, max_cyc;
    mn0 = a0; mx0 = b0; mn1 = a1; mx1 = b1; seen_cfg = sn;
    resets = 0;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    cyc = 1;
    @(posedge clk); #1ps;
    checks++;
    if (locked || !busy) begin failures++; $display("FAIL start not taken"); end
    while (!locked) begin @(posedge clk); cyc++; end
    #1ps;
    exp_resets = exp_rf ? 2 * N : N;
    // measurement time per pass plus at most 120 steps of 4 cycles
    max_cyc = (exp_rf ? 2 : 1) * (N * (OFF + LOCK + MEAS) + EW + 3) + 3 * 120 * 4;
    checks += 5;
    if (int'(phase) != exp_phase || pll_phase != exp_phase) begin
      failures++; $display("FAIL phase %0d pll %0d expected %0d", phase, pll_phase, exp_phase);
    end
    if (rf != exp_rf) begin failures++; $display("FAIL rf %0d", rf); end
    if (error != exp_err) begin failures++; $display("FAIL error %0d", error); end
    if (resets != exp_resets) begin failures++; $display("FAIL resets %0d expected %0d", resets, exp_resets); end
    if (cyc < (exp_rf ? 2 : 1) * N * (OFF + LOCK + MEAS) || cyc > max_cyc) begin
      failures++; $display("FAIL calibration took %0d cycles", cyc);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (!locked || busy || !serdes_en || mon_en) begin failures++; $display("FAIL not idle after lock"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge clk);
    // case 1 of the method: no wrap
    scenario(3'd2, 3'd6, 3'd0, 3'd0, 1'b1, 2 * 15 + 27, 1'b0, 1'b0);
    scenario(3'd0, 3'd4, 3'd0, 3'd0, 1'b1, 27, 1'b0, 1'b0);
    scenario(3'd7, 3'd7, 3'd0, 3'd0, 1'b1, (7 * 15 + 27) % 120, 1'b0, 1'b0);
    // case 2: <0,7>, reverse and measure again
    scenario(3'd0, 3'd7, 3'd1, 3'd4, 1'b1, 1 * 15 + 27, 1'b1, 1'b0);
    scenario(3'd0, 3'd7, 3'd3, 3'd6, 1'b1, 3 * 15 + 27, 1'b1, 1'b0);
    // <0,7> twice, and no code at all: error
    scenario(3'd0, 3'd7, 3'd0, 3'd7, 1'b1, 27, 1'b1, 1'b1);
    scenario(3'd7, 3'd0, 3'd7, 3'd0, 1'b0, (7 * 15 + 27) % 120, 1'b0, 1'b1);
    // random pairs without wrap
    for (int i = 0; i < 6; i++) begin
      int a, b;
      a = $urandom_range(3);
      b = a + $urandom_range(4);
      scenario(bin_t'(a), bin_t'(b), 3'd0, 3'd0, 1'b1, (a * 15 + 27) % 120, 1'b0, 1'b0);
    end
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
