// tb_etof_fctl_top -- end-to-end testbench of the latency-uncertainty
// elimination logic, with every parameter of the top at its default.
//
// A test generator (4-clock pulses, LFSR-random gaps) feeds a SerDes model
// whose recovered clock lands on one of ten phases over 10.2 ns after every
// power-up, on top of a channel delay delta. For several deltas (one whose
// swing stays inside a clock cycle, one that wraps round it, one longer than
// a cycle, and random ones) the testbench
//   1. resets the design, which calibrates by itself (power-cycling the
//      SerDes through serdes_en), and checks rf and the chosen phase against
//      a prediction from the phases the SerDes model actually produced;
//   2. power-cycles the link itself many times, through all ten phases, and
//      checks that the latency from the transmitted word to stable_data is
//      the same after every power-up, and that the test pulses arrive four
//      cycles wide;
//   3. samples rxd directly with ref_clk, as a plain re-synchroniser would,
//      and records whether that latency changes between power-ups.
// One calibration is started through the CSR bus and the CSRs are read back.
// Counted mechanisms: no-wrap calibration (rf = 0), wrap calibration (rf = 1),
// delta over one cycle, controller SerDes power cycles, PLL steps, CSR start,
// pulses delivered, and plain re-synchronisation showing two latencies.
`timescale 1ns/1ps
module tb_etof_fctl_top;
  import etof_fc_pkg::*;
  localparam int T = 24000;

  logic ref_clk = 1'b0, rst_n = 1'b0;
  logic gen_rst_n = 1'b0;
  logic [15:0] txd, rxd, stable_data, bus_rdata;
  logic pulse, rx_clk, serdes_en, locked, cal_error, rf;
  logic link_en = 1'b1;
  logic [1:0] bus_addr = '0;
  logic bus_wr = 1'b0;
  logic [15:0] bus_wdata = '0;
  phase_t phase;
  int unsigned delta_ps = 2000;
  int force_idx = -1;
  int unsigned idx;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_cal_rf0 = 0, n_cal_rf1 = 0, n_long_delta = 0, n_ctrl_resets = 0;
  int n_pll_steps = 0, n_csr_start = 0, n_pulses = 0, n_naive_two = 0;

  initial forever #(T / 2 * 1ps) ref_clk = ~ref_clk;

  fc_test_gen u_gen (.clk(ref_clk), .rst_n(gen_rst_n), .txd(txd), .pulse(pulse));

  tlk1501_model u_serdes (
    .tx_clk(ref_clk), .txd(txd), .enable(serdes_en & link_en),
    .delta_ps(delta_ps), .force_idx(force_idx), .idx(idx),
    .rx_clk(rx_clk), .rxd(rxd));

  etof_fctl_top dut (
    .ref_clk, .rst_n, .rx_clk, .rxd, .serdes_en, .stable_data,
    .bus_addr, .bus_wr, .bus_wdata, .bus_rdata,
    .locked, .cal_error, .rf, .phase);

  // observers
  logic en_q = 1'b1;
  logic [9:0] drawn = '0;
  logic link_q = 1'b0;
  phase_t phase_q = '0;
  always @(posedge ref_clk) begin
    en_q <= serdes_en;
    if (en_q && !serdes_en) n_ctrl_resets++;
    phase_q <= phase;
    if (phase_q != phase) n_pll_steps++;
    link_q <= serdes_en & link_en;
    if (link_q) drawn[idx] <= 1'b1;
  end

  // latency of a word: transmit counter now minus the counter in the word
  function automatic int lat_of(logic [15:0] w);
    return int'(15'(txd[15:1] - w[15:1]));
  endfunction

  // predicted TDC bin of the recovered-clock edge for phase k, phi at p steps
  function automatic int bin_of(int k, int p);
    int d;
    d = (int'(delta_ps) + k * 10200 / 9 - p * 200) % T;
    if (d < 0) d += T;
    return d / 3000;
  endfunction

  function automatic bit delta_ok(int unsigned dl);
    int a, r;
    for (int k = 0; k < 10; k++) begin
      a = (int'(dl) + k * 10200 / 9) % 3000;
      if (a < 20 || a > 2980) return 1'b0;     // TDC edge on a bin border
      r = (int'(dl) + k * 10200 / 9 + 1000) % (T / 2);
      if (r < 300 || r > T / 2 - 300) return 1'b0;   // rxd change against ref_clk edges
    end
    return 1'b1;
  endfunction

  task automatic calibrate_and_check(input bit via_csr);
    int mn, mx, expect_phase, b, cyc;
    bit wrap;
    if (!via_csr) begin
      rst_n = 1'b0;
      repeat (3) @(posedge ref_clk);
      drawn = '0;
      rst_n = 1'b1;
    end else begin
      @(posedge ref_clk);
      bus_addr <= 2'd0; bus_wdata <= 16'h0001; bus_wr <= 1'b1;
      @(posedge ref_clk);
      bus_wr <= 1'b0;
      drawn = '0;
      n_csr_start++;
      repeat (3) @(posedge ref_clk);
    end
    cyc = 0;
    while (!locked && cyc < 200000) begin @(posedge ref_clk); cyc++; end
    #1ps;
    // prediction from the phases the SerDes model drew
    mn = 7; mx = 0;
    for (int k = 0; k < 10; k++) if (drawn[k]) begin
      b = bin_of(k, 0);
      if (b < mn) mn = b;
      if (b > mx) mx = b;
    end
    wrap = (mn == 0 && mx == 7);
    expect_phase = (mn * 15 + 27) % 120;
    if (wrap) begin
      mn = 7;
      for (int k = 0; k < 10; k++) if (drawn[k]) begin
        b = bin_of(k, 60);
        if (b < mn) mn = b;
      end
      expect_phase = (mn * 15 + 27) % 120;
    end
    checks++;
    if (!locked || cal_error || rf != wrap || int'(phase) != expect_phase) begin
      failures++;
      $display("FAIL calibration delta=%0d locked=%0d err=%0d rf=%0d phase=%0d expected rf=%0d phase=%0d drawn=%b",
               delta_ps, locked, cal_error, rf, phase, wrap, expect_phase, drawn);
    end
    if (wrap) n_cal_rf1++; else n_cal_rf0++;
    if (delta_ps > T) n_long_delta++;
    // CSR read-back of STATUS and PHASE
    @(posedge ref_clk); bus_addr <= 2'd1;
    @(posedge ref_clk); @(posedge ref_clk); #1ps;
    checks++;
    if (bus_rdata[3:0] != {cal_error, locked, 1'b0, rf}) begin failures++; $display("FAIL STATUS %h", bus_rdata); end
    @(posedge ref_clk); bus_addr <= 2'd3;
    @(posedge ref_clk); @(posedge ref_clk); #1ps;
    checks++;
    if (bus_rdata != {9'b0, phase}) begin failures++; $display("FAIL PHASE %h", bus_rdata); end
  endtask

  // power-cycle the link n times and check the latency after each power-up
  task automatic check_latency(int n);
    int ref_lat, naive_first, lat, nl, width;
    bit naive_two, partial;
    logic [15:0] naive;
    ref_lat = -1; naive_first = -1; naive_two = 1'b0;
    for (int r = 0; r < n; r++) begin
      force_idx = (r < 10) ? r : -1;
      link_en = 1'b0;
      repeat (8) @(posedge ref_clk);
      link_en = 1'b1;
      repeat (20) @(posedge ref_clk);
      width = 0;
      partial = 1'b1;
      for (int c = 0; c < 300; c++) begin
        @(posedge ref_clk);
        naive = rxd;          // value a plain ref_clk re-synchroniser would take
        #1ps;
        lat = lat_of(stable_data);
        checks++;
        if (ref_lat < 0) ref_lat = lat;
        else if (lat != ref_lat) begin
          failures++;
          $display("FAIL delta=%0d phase idx %0d: latency %0d, earlier %0d", delta_ps, idx, lat, ref_lat);
        end
        nl = int'(15'(txd[15:1] - 15'd1 - naive[15:1]));
        if (naive_first < 0) naive_first = nl;
        else if (nl != naive_first) naive_two = 1'b1;
        // pulse width at the output
        if (stable_data[0]) width++;
        else begin
          if (width != 0 && !partial) begin
            checks++;
            n_pulses++;
            if (width != 4) begin failures++; $display("FAIL pulse width %0d", width); end
          end
          width = 0;
          partial = 1'b0;
        end
      end
    end
    force_idx = -1;
    if (naive_two) n_naive_two++;
    $display("delta=%0d ps: rf=%0d phase=%0d steps, latency %0d cycles, plain re-sync latency %s",
             delta_ps, rf, phase, ref_lat, naive_two ? "varies" : "fixed");
  endtask

  initial begin
    int unsigned deltas[5];
    deltas = '{2250, 16500, 30800, 0, 0};
    repeat (2) @(posedge ref_clk);
    gen_rst_n = 1'b1;
    for (int s = 0; s < 5; s++) begin
      delta_ps = deltas[s];
      if (delta_ps == 0) begin
        delta_ps = $urandom_range(3 * T);
        while (!delta_ok(delta_ps)) delta_ps = $urandom_range(3 * T);
      end
      if (!delta_ok(delta_ps)) $display("note: delta %0d close to a border", delta_ps);
      calibrate_and_check(1'b0);
      check_latency(14);
    end
    // recalibration started from the CSR bus, then a new check
    calibrate_and_check(1'b1);
    check_latency(10);

    checks += 8;
    if (n_cal_rf0 == 0)     begin failures++; $display("FAIL never calibrated without wrap"); end
    if (n_cal_rf1 == 0)     begin failures++; $display("FAIL never calibrated with reversed clock"); end
    if (n_long_delta == 0)  begin failures++; $display("FAIL no delta over one cycle"); end
    if (n_ctrl_resets == 0) begin failures++; $display("FAIL controller never power-cycled the SerDes"); end
    if (n_pll_steps == 0)   begin failures++; $display("FAIL no PLL steps"); end
    if (n_csr_start == 0)   begin failures++; $display("FAIL no CSR start"); end
    if (n_pulses == 0)      begin failures++; $display("FAIL no pulses delivered"); end
    if (n_naive_two == 0)   begin failures++; $display("FAIL plain re-sync never showed two latencies"); end
    $display("mechanisms: cal rf=0 %0d, cal rf=1 %0d, delta>T %0d, SerDes power cycles %0d, PLL steps %0d, CSR starts %0d, pulses %0d, plain re-sync uncertain %0d",
             n_cal_rf0, n_cal_rf1, n_long_delta, n_ctrl_resets, n_pll_steps, n_csr_start, n_pulses, n_naive_two);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(20ms);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
