// tb_fc_csr -- self-checking testbench of the CSR block.
//
// Writes CTRL with and without bit 0 and checks that start pulses for one
// cycle only in the first case; reads STATUS, MINMAX and PHASE for random
// status values and compares with the documented bit layout.
`timescale 1ns/1ps
module tb_fc_csr;
  import etof_fc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] bus_addr = '0;
  logic bus_wr = 1'b0;
  logic [15:0] bus_wdata = '0, bus_rdata;
  cal_status_t status = '0;
  logic start;
  int checks = 0, failures = 0;
  int starts = 0;

  initial forever #12ns clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  fc_csr dut (.clk, .rst_n, .bus_addr, .bus_wr, .bus_wdata, .bus_rdata, .status, .start);

  task automatic write(logic [1:0] a, logic [15:0] d);
    @(posedge clk);
    bus_addr <= a; bus_wr <= 1'b1; bus_wdata <= d;
    @(posedge clk);
    bus_wr <= 1'b0;
  endtask

  task automatic read_check(logic [1:0] a, logic [15:0] exp);
    @(posedge clk);
    bus_addr <= a;
    @(posedge clk);
    @(posedge clk); #1ps;
    checks++;
    if (bus_rdata !== exp) begin failures++; $display("FAIL read %0d got %h expected %h", a, bus_rdata, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    write(2'd0, 16'h0001);
    repeat (3) @(posedge clk);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL %0d start pulses", starts); end
    write(2'd0, 16'hFFFE);
    write(2'd1, 16'hFFFF);
    repeat (3) @(posedge clk);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL start on wrong write"); end
    for (int i = 0; i < 50; i++) begin
      logic e, l, b, r, s;
      logic [2:0] mx, mn;
      logic [6:0] ph;
      {e, l, b, r, s} = 5'($urandom);
      mx = 3'($urandom); mn = 3'($urandom); ph = 7'($urandom_range(119));
      status = '{error: e, locked: l, busy: b, rf: r, seen: s, max_val: mx, min_val: mn, phase: ph};
      read_check(2'd1, {12'b0, e, l, b, r});
      read_check(2'd2, {9'b0, s, mx, mn});
      read_check(2'd3, {9'b0, ph});
      read_check(2'd0, 16'h0000);
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
