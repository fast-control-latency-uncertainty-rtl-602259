// tb_phase_monitor -- self-checking testbench of the phase monitor.
//
// Drives TDC-style thermometer codes built from a chosen bin b (the first
// (b - 3) mod 8 bits, 0 read as 8, equal to a random level s, the rest ~s)
// and checks the decoded value, the running <min,max>, that codes are ignored
// while gate is low, and that enable low clears the statistics.
`timescale 1ns/1ps
module tb_phase_monitor;
  import etof_fc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable = 1'b0, gate = 1'b0;
  logic [7:0] v = '0;
  logic v_valid = 1'b0;
  bin_t value, min_val, max_val;
  logic seen;
  int checks = 0, failures = 0;

  initial forever #12ns clk = ~clk;

  phase_monitor dut (.clk, .rst_n, .enable, .gate, .v, .v_valid, .value, .min_val, .max_val, .seen);

  function automatic logic [7:0] code_for(int b, logic s);
    int n;
    logic [7:0] x;
    n = (b + 5) % 8;
    if (n == 0) n = 8;
    for (int k = 0; k < 8; k++) x[k] = (k < n) ? s : ~s;
    return x;
  endfunction

  task automatic send(int b);
    @(posedge clk);
    v <= code_for(b, 1'($urandom_range(1)));
    v_valid <= 1'b1;
    @(posedge clk);
    v_valid <= 1'b0;
    @(posedge clk); #1ps;
    checks++;
    if (value != bin_t'(b)) begin failures++; $display("FAIL decode bin %0d got %0d", b, value); end
  endtask

  task automatic check_mm(int mn, int mx, logic sn);
    repeat (2) @(posedge clk);
    #1ps;
    checks++;
    if (seen !== sn || (sn && (min_val != bin_t'(mn) || max_val != bin_t'(mx)))) begin
      failures++;
      $display("FAIL min/max %0d/%0d seen %0d, expected %0d/%0d %0d", min_val, max_val, seen, mn, mx, sn);
    end
  endtask

  initial begin
    int mn, mx, b;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    enable <= 1'b1; gate <= 1'b1;
    repeat (3) @(posedge clk);
    for (int trial = 0; trial < 20; trial++) begin
      mn = 7; mx = 0;
      for (int i = 0; i < 12; i++) begin
        b = $urandom_range(7);
        send(b);
        if (b < mn) mn = b;
        if (b > mx) mx = b;
        check_mm(mn, mx, 1'b1);
      end
      // codes while gate is low are ignored
      gate <= 1'b0;
      repeat (3) @(posedge clk);
      send(0);
      send(7);
      check_mm(mn, mx, 1'b1);
      gate <= 1'b1;
      // disable clears
      enable <= 1'b0;
      repeat (4) @(posedge clk);
      check_mm(7, 0, 1'b0);
      enable <= 1'b1;
      repeat (3) @(posedge clk);
    end
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
