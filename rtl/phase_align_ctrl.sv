// phase_align_ctrl -- controller that finds the re-capture position.
//
// After start (or once after reset when AUTO_START is set) it:
//  1. sets rf = 0 and steps the phase-shift PLL back to 0 degrees;
//  2. clears the phase monitor and, N_RESETS times, disables the SerDes for
//     OFF_CYCLES, enables it, waits LOCK_CYCLES and lets the monitor collect
//     TDC codes for MEAS_CYCLES (each power-up gives the recovered clock a new
//     phase), giving the <min,max> bin pair of the recovered-clock swing;
//  3. if <min,max> is not <0,7>, steps phi to min*45 + 81 degrees
//     (min*STEPS_PER_BIN + OFFSET_STEPS) and locks;
//  4. if it is <0,7> (the swing wraps round the cycle), sets rf = 1, steps phi
//     to 180 degrees and measures again from step 2; the next result is then
//     applied as in step 3, and rf = 1 makes the re-capture path use the
//     falling edge of phi + 180, i.e. of the reversed clock.
// A second <0,7> with rf = 1, or no code at all, sets error (the shift is
// still applied). The phase is stepped one PLL step at a time, always upwards
// modulo STEPS, waiting for ps_done after each step.
//
// Steps 1-4, the 81-degree offset, the 45-degree bins and the 180-degree
// reversal follow the published algorithm. The reset/lock/measure counts,
// the upward stepping and the error handling are this design's own.
//
// Interface: clk is the global clock. mon_en low clears the monitor;
// mon_gate enables collection. min_val/max_val/seen come from the monitor in
// the phi domain; they are read only after mon_gate has been low for
// EVAL_WAIT cycles, when they are static.
`timescale 1ns/1ps
module phase_align_ctrl
  import etof_fc_pkg::bin_t, etof_fc_pkg::phase_t, etof_fc_pkg::ctrl_state_t;
  import etof_fc_pkg::S_IDLE, etof_fc_pkg::S_OFF, etof_fc_pkg::S_LOCK, etof_fc_pkg::S_MEAS;
  import etof_fc_pkg::S_EVAL, etof_fc_pkg::S_SHIFT, etof_fc_pkg::S_DONE;
#(
  parameter int unsigned STEPS         = 120,
  parameter int unsigned STEPS_PER_BIN = 15,
  parameter int unsigned OFFSET_STEPS  = 27,
  parameter int unsigned HALF_STEPS    = 60,
  parameter int unsigned N_RESETS      = 64,
  parameter int unsigned OFF_CYCLES    = 16,
  parameter int unsigned LOCK_CYCLES   = 64,
  parameter int unsigned MEAS_CYCLES   = 64,
  parameter int unsigned EVAL_WAIT     = 8,
  parameter bit          AUTO_START    = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  // SerDes and phase monitor
  output logic   serdes_en,
  output logic   mon_en,
  output logic   mon_gate,
  input  bin_t   min_val,
  input  bin_t   max_val,
  input  logic   seen,
  // phase-shift PLL
  output logic   ps_step,
  output logic   ps_up,
  input  logic   ps_done,
  // results
  output logic   rf,
  output phase_t phase,
  output logic   busy,
  output logic   locked,
  output logic   error,
  output ctrl_state_t state
);

  ctrl_state_t after_shift;
  phase_t      target;
  logic        waiting;
  logic        auto_pending;
  logic [15:0] cnt;
  logic [15:0] resets;

  // Phase that <min,max> asks for (step 3), modulo STEPS
  phase_t shift_for_min;
  always_comb begin
    int unsigned s;
    s = 32'(min_val) * STEPS_PER_BIN + OFFSET_STEPS;
    if (s >= STEPS) s -= STEPS;
    shift_for_min = phase_t'(s);
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign ps_up = 1'b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state        <= S_IDLE;
      after_shift  <= S_IDLE;
      target       <= '0;
      phase        <= '0;
      waiting      <= 1'b0;
      auto_pending <= AUTO_START;
      cnt          <= '0;
      resets       <= '0;
      rf           <= 1'b0;
      locked       <= 1'b0;
      error        <= 1'b0;
      serdes_en    <= 1'b1;
      mon_en       <= 1'b0;
      mon_gate     <= 1'b0;
      ps_step      <= 1'b0;
    end else begin
      ps_step <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start || auto_pending) begin
            auto_pending <= 1'b0;
            rf           <= 1'b0;
            locked       <= 1'b0;
            error        <= 1'b0;
            target       <= '0;
            after_shift  <= S_OFF;
            resets       <= '0;
            cnt          <= '0;
            state        <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          if (waiting) begin
            if (ps_done) begin
              waiting <= 1'b0;
              phase   <= (32'(phase) == STEPS - 1) ? '0 : phase + phase_t'(1);
            end
          end else if (phase == target) begin
            state <= after_shift;
            cnt   <= '0;
            if (after_shift == S_OFF) mon_en <= 1'b1;
            if (after_shift == S_DONE) locked <= 1'b1;
          end else begin
            ps_step <= 1'b1;
            waiting <= 1'b1;
          end
        end
        S_OFF: begin
          serdes_en <= 1'b0;
          cnt       <= cnt + 16'd1;
          if (32'(cnt) == OFF_CYCLES - 1) begin
            serdes_en <= 1'b1;
            cnt       <= '0;
            state     <= S_LOCK;
          end
        end
        S_LOCK: begin
          cnt <= cnt + 16'd1;
          if (32'(cnt) == LOCK_CYCLES - 1) begin
            cnt      <= '0;
            mon_gate <= 1'b1;
            state    <= S_MEAS;
          end
        end
        S_MEAS: begin
          cnt <= cnt + 16'd1;
          if (32'(cnt) == MEAS_CYCLES - 1) begin
            cnt      <= '0;
            mon_gate <= 1'b0;
            resets   <= resets + 16'd1;
            state    <= (32'(resets) == N_RESETS - 1) ? S_EVAL : S_OFF;
          end
        end
        S_EVAL: begin
          cnt <= cnt + 16'd1;
          if (32'(cnt) == EVAL_WAIT - 1) begin
            cnt    <= '0;
            mon_en <= 1'b0;
            state  <= S_SHIFT;
            if (seen && min_val == bin_t'(0) && max_val == bin_t'(7) && !rf) begin
              // step 4: the swing wraps; reverse the clock and measure again
              rf          <= 1'b1;
              target      <= phase_t'(HALF_STEPS);
              after_shift <= S_OFF;
              resets      <= '0;
            end else begin
              // step 3
              error       <= !seen || (min_val == bin_t'(0) && max_val == bin_t'(7));
              target      <= shift_for_min;
              after_shift <= S_DONE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end

  // Handshake rule: no new step while one is outstanding
  always_ff @(posedge clk)
    if (rst_n) assert (!(ps_step && ps_done)) else $error("ps_step while a step is pending");

endmodule
