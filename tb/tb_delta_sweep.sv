// tb_delta_sweep -- the calibration against every channel delay.
//
// Sweeps the channel delay delta of the SerDes model across one full clock
// cycle in 600 ps steps (plus a small offset that keeps edges from
// coinciding), with the design at its default parameters. For each delta the
// design is reset and calibrates itself; the testbench then power-cycles the
// link through each of the ten recovered-clock phases and checks that the
// latency to stable_data is the same for all of them. It also checks that the
// reversed clock (rf = 1) is used exactly when the swing of the recovered
// clock wraps round the cycle boundary as seen by the TDC, and counts how many
// deltas took each branch (both must occur).
`timescale 1ns/1ps
module tb_delta_sweep;
  import etof_fc_pkg::*;
  localparam int T = 24000;

  logic ref_clk = 1'b0, rst_n = 1'b0, gen_rst_n = 1'b0;
  logic [15:0] txd, rxd, stable_data, bus_rdata;
  logic pulse, rx_clk, serdes_en, locked, cal_error, rf;
  logic link_en = 1'b1;
  phase_t phase;
  int unsigned delta_ps = 0;
  int force_idx = -1;
  int unsigned idx;
  int checks = 0, failures = 0;
  int n_rf0 = 0, n_rf1 = 0;

  initial forever #(T / 2 * 1ps) ref_clk = ~ref_clk;

  fc_test_gen u_gen (.clk(ref_clk), .rst_n(gen_rst_n), .txd(txd), .pulse(pulse));

  tlk1501_model u_serdes (
    .tx_clk(ref_clk), .txd(txd), .enable(serdes_en & link_en),
    .delta_ps(delta_ps), .force_idx(force_idx), .idx(idx),
    .rx_clk(rx_clk), .rxd(rxd));

  etof_fctl_top dut (
    .ref_clk, .rst_n, .rx_clk, .rxd, .serdes_en, .stable_data,
    .bus_addr(2'd0), .bus_wr(1'b0), .bus_wdata(16'h0), .bus_rdata,
    .locked, .cal_error, .rf, .phase);

  // record which SerDes phases the calibration saw
  logic [9:0] drawn = '0;
  logic link_q = 1'b0;
  always @(posedge ref_clk) begin
    link_q <= serdes_en & link_en;
    if (link_q) drawn[idx] <= 1'b1;
  end

  initial begin
    int lat, ref_lat, cyc, mn, mx, b, d;
    repeat (2) @(posedge ref_clk);
    gen_rst_n = 1'b1;
    for (int s = 0; s < T / 600; s++) begin
      delta_ps = s * 600 + 137;
      rst_n = 1'b0;
      repeat (3) @(posedge ref_clk);
      drawn = '0;
      rst_n = 1'b1;
      cyc = 0;
      while (!locked && cyc < 100000) begin @(posedge ref_clk); cyc++; end
      #1ps;
      mn = 7; mx = 0;
      for (int k = 0; k < 10; k++) if (drawn[k]) begin
        d = (int'(delta_ps) + k * 10200 / 9) % T;
        b = d / 3000;
        if (b < mn) mn = b;
        if (b > mx) mx = b;
      end
      checks++;
      if (!locked || cal_error || rf != (mn == 0 && mx == 7)) begin
        failures++;
        $display("FAIL delta=%0d: locked=%0d error=%0d rf=%0d <min,max>=<%0d,%0d>", delta_ps, locked, cal_error, rf, mn, mx);
      end
      if (rf) n_rf1++; else n_rf0++;
      ref_lat = -1;
      for (int k = 0; k < 10; k++) begin
        force_idx = k;
        link_en = 1'b0;
        repeat (6) @(posedge ref_clk);
        link_en = 1'b1;
        repeat (20) @(posedge ref_clk);
        for (int c = 0; c < 30; c++) begin
          @(posedge ref_clk); #1ps;
          lat = int'(15'(txd[15:1] - stable_data[15:1]));
          checks++;
          if (ref_lat < 0) ref_lat = lat;
          else if (lat != ref_lat) begin
            failures++;
            $display("FAIL delta=%0d phase %0d: latency %0d, phase 0 gave %0d", delta_ps, k, lat, ref_lat);
          end
        end
      end
      force_idx = -1;
      $display("delta=%5d ps  rf=%0d  phi=%3d steps  latency=%0d", delta_ps, rf, phase, ref_lat);
    end
    checks += 2;
    if (n_rf0 == 0) begin failures++; $display("FAIL no delta without wrap"); end
    if (n_rf1 == 0) begin failures++; $display("FAIL no delta with wrap"); end
    $display("deltas calibrated with rf=0: %0d, with rf=1: %0d", n_rf0, n_rf1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(40ms);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
