// etof_fctl_top -- latency-uncertainty elimination logic of an ETOF fast
// control module.
//
// The module receives the 16-bit fast control word stream that a SerDes
// recovers together with its clock rx_clk, and delivers it in the global
// clock (ref_clk, 24 ns) domain with the same latency after every SerDes
// power-up. The SerDes gives rx_clk one of ten phases spread over about
// 10 ns each time it locks; re-timing its data straight into ref_clk can
// therefore differ by one cycle from one power-up to the next. Here the data
// are re-captured instead on the falling edge of a copy of ref_clk, phi,
// whose phase is chosen automatically:
//
//   pll_phase_shift   phi = ref_clk shifted in 200 ps steps, and phi + 180
//   pll_x2_4phase     four phases of 2 x phi for the TDC
//   tdc               measures the rx_clk edge against phi in 3 ns bins
//   phase_monitor     <min,max> of the TDC bins over many SerDes power-ups
//   phase_align_ctrl  power-cycles the SerDes (serdes_en), reads <min,max>,
//                     sets phi to min*45+81 degrees, or first reverses the
//                     clock (rf) when the swing wraps round the cycle
//   recapture_path    rx_clk alignment register, phi / phi+180 sample
//                     groups, rf multiplexer, ref_clk output register
//   fc_csr            start, status, <min,max> and phase over a register bus
//
// The block diagram follows the published design. The TDC is clocked by phi
// and its hit is rx_clk divided by two; the register bus stands for the VME
// interface, which is outside this module. Both PLLs are behavioural models,
// so this module simulates but does not synthesize as is; on an FPGA they are
// replaced by PLL primitives with the same ports.
//
// Timing: stable_data follows rxd by a fixed number of ref_clk cycles once
// locked is high; calibration takes about N_RESETS * (OFF + LOCK + MEAS)
// cycles, twice when the clock has to be reversed.
`timescale 1ns/1ps
module etof_fctl_top
  import etof_fc_pkg::*;
#(
  parameter int unsigned N_RESETS    = 64,
  parameter int unsigned OFF_CYCLES  = 16,
  parameter int unsigned LOCK_CYCLES = 64,
  parameter int unsigned MEAS_CYCLES = 64
) (
  input  logic              ref_clk,
  input  logic              rst_n,
  // SerDes receiver side
  input  logic              rx_clk,
  input  logic [DATA_W-1:0] rxd,
  output logic              serdes_en,
  // re-captured fast control data
  output logic [DATA_W-1:0] stable_data,
  // register bus from the VME interface
  input  logic [1:0]        bus_addr,
  input  logic              bus_wr,
  input  logic [15:0]       bus_wdata,
  output logic [15:0]       bus_rdata,
  // status
  output logic              locked,
  output logic              cal_error,
  output logic              rf,
  output phase_t            phase
);

  logic        phi, phi_180;
  logic [3:0]  df_clk;
  logic        ps_step, ps_up, ps_done;
  logic [6:0]  pll_phase;
  logic [7:0]  v;
  logic        v_valid;
  bin_t        min_val, max_val;
  logic        seen;
  logic        mon_en, mon_gate;
  logic        start, busy;
  ctrl_state_t state;
  cal_status_t status;

  pll_phase_shift #(
    .STEP_PS   (STEP_PS),
    .STEPS     (STEPS)
  ) u_pll_ps (
    .ref_clk (ref_clk),
    .rst_n   (rst_n),
    .ps_step (ps_step),
    .ps_up   (ps_up),
    .ps_done (ps_done),
    .phase   (pll_phase),
    .phi     (phi),
    .phi_180 (phi_180)
  );

  pll_x2_4phase #(.PERIOD_PS(PERIOD_PS)) u_pll_x2 (
    .clk_in (phi),
    .df_clk (df_clk)
  );

  tdc u_tdc (
    .rst_n       (rst_n),
    .work_clk    (phi),
    .df_clk      (df_clk),
    .hit_src_clk (rx_clk),
    .v           (v),
    .v_valid     (v_valid)
  );

  phase_monitor u_mon (
    .clk     (phi),
    .rst_n   (rst_n),
    .enable  (mon_en),
    .gate    (mon_gate),
    .v       (v),
    .v_valid (v_valid),
    .value   (),
    .min_val (min_val),
    .max_val (max_val),
    .seen    (seen)
  );

  phase_align_ctrl #(
    .STEPS         (STEPS),
    .STEPS_PER_BIN (STEPS_PER_BIN),
    .OFFSET_STEPS  (OFFSET_STEPS),
    .HALF_STEPS    (HALF_STEPS),
    .N_RESETS      (N_RESETS),
    .OFF_CYCLES    (OFF_CYCLES),
    .LOCK_CYCLES   (LOCK_CYCLES),
    .MEAS_CYCLES   (MEAS_CYCLES)
  ) u_ctrl (
    .clk       (ref_clk),
    .rst_n     (rst_n),
    .start     (start),
    .serdes_en (serdes_en),
    .mon_en    (mon_en),
    .mon_gate  (mon_gate),
    .min_val   (min_val),
    .max_val   (max_val),
    .seen      (seen),
    .ps_step   (ps_step),
    .ps_up     (ps_up),
    .ps_done   (ps_done),
    .rf        (rf),
    .phase     (phase),
    .busy      (busy),
    .locked    (locked),
    .error     (cal_error),
    .state     (state)
  );

  recapture_path #(.W(DATA_W)) u_recap (
    .rst_n       (rst_n),
    .rx_clk      (rx_clk),
    .rxd         (rxd),
    .phi         (phi),
    .phi_180     (phi_180),
    .ref_clk     (ref_clk),
    .rf          (rf),
    .stable_data (stable_data)
  );

  always_comb begin
    status         = '0;
    status.error   = cal_error;
    status.locked  = locked;
    status.busy    = busy;
    status.rf      = rf;
    status.seen    = seen;
    status.max_val = max_val;
    status.min_val = min_val;
    status.phase   = phase;
  end

  fc_csr u_csr (
    .clk       (ref_clk),
    .rst_n     (rst_n),
    .bus_addr  (bus_addr),
    .bus_wr    (bus_wr),
    .bus_wdata (bus_wdata),
    .bus_rdata (bus_rdata),
    .status    (status),
    .start     (start)
  );

  // The controller's phase count must track the PLL's
  always_ff @(posedge ref_clk)
    if (rst_n && !ps_done && !ps_step && state != S_SHIFT)
      assert (pll_phase == phase) else $error("PLL phase %0d != controller phase %0d", pll_phase, phase);

endmodule
