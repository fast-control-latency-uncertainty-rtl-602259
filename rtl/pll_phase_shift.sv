// pll_phase_shift -- BEHAVIOURAL MODEL (not synthesizable) of the FPGA PLL
// with dynamic phase shift that produces the sampling clock phi.
//
// phi is ref_clk delayed by phase * STEP_PS (0 <= phase < STEPS), phi_180 is
// its inverse. Each one-cycle pulse on ps_step moves phase by one step
// (ps_up = 1: later, 0: earlier, modulo STEPS) and ps_done pulses for one
// ref_clk cycle two cycles later, when the new phase is in effect. Reset puts
// phase back to 0.
//
// The 200 ps step and 120 steps per cycle follow the published
// method; the step/up/done handshake and its two-cycle latency are this
// model's own, patterned on common FPGA dynamic-phase-shift ports. A real
// PLL would be an FPGA primitive in its place.
`timescale 1ns/1ps
module pll_phase_shift #(
  parameter int unsigned STEP_PS   = 200,
  parameter int unsigned STEPS     = 120
) (
  input  logic       ref_clk,
  input  logic       rst_n,
  input  logic       ps_step,
  input  logic       ps_up,
  output logic       ps_done,
  output logic [6:0] phase,
  output logic       phi,
  output logic       phi_180
);

  logic [1:0] pend;

  always_ff @(posedge ref_clk or negedge rst_n)
    if (!rst_n) begin
      phase   <= '0;
      pend    <= '0;
      ps_done <= 1'b0;
    end else begin
      pend    <= {pend[0], ps_step};
      ps_done <= pend[1];
      if (ps_step) begin
        if (ps_up) phase <= (32'(phase) == STEPS - 1) ? '0 : phase + 7'd1;
        else       phase <= (phase == '0) ? 7'(STEPS - 1) : phase - 7'd1;
      end
    end

  // Each edge of ref_clk is repeated on phi after phase * STEP_PS. The delay
  // is below one period, so each process is back in time for its next edge.
  int unsigned d_ps;
  assign d_ps = 32'(phase) * STEP_PS;

  initial phi = 1'b0;
  always begin
    @(posedge ref_clk);
    #(d_ps * 1ps);
    phi <= 1'b1;
  end
  always begin
    @(negedge ref_clk);
    #(d_ps * 1ps);
    phi <= 1'b0;
  end

  assign phi_180 = ~phi;

endmodule
