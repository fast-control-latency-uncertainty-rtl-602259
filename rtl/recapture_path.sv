// recapture_path -- fixed-latency re-capture of the SerDes data.
//
// The recovered word rxd is first registered on the rising edge of rx_clk
// (alignment group), so all 16 bits change together relative to rx_clk. Two
// further groups sample the aligned word: one on the falling edge of the
// shifted clock phi, the other on the falling edge of phi_180 (phi + 180
// degrees). rf chooses between them (rf = 0: phi group, rf = 1: phi_180
// group) and the chosen word is registered on the rising edge of ref_clk as
// stable_data. Once the controller has placed the falling edge of the chosen
// clock in the middle of the window where the aligned word is stable for
// every possible recovered-clock phase, stable_data has the same latency
// after every SerDes power-up.
//
// Structure (alignment group, two sample groups, MUX, output register) and
// the falling-edge capture follow the published method. The rising-edge
// choice for the alignment and output registers and the reset to zero are
// this design's own.
//
// Timing: rxd -> stable_data takes one rx_clk edge, one phi/phi_180 falling
// edge and one ref_clk rising edge.
`timescale 1ns/1ps
module recapture_path #(
  parameter int unsigned W = 16
) (
  input  logic         rst_n,
  input  logic         rx_clk,
  input  logic [W-1:0] rxd,
  input  logic         phi,
  input  logic         phi_180,
  input  logic         ref_clk,
  input  logic         rf,
  output logic [W-1:0] stable_data
);

  logic [W-1:0] aligned;   // alignment group, rx_clk domain
  logic [W-1:0] samp_0;    // sampled at the falling edge of phi
  logic [W-1:0] samp_180;  // sampled at the falling edge of phi_180
  logic [W-1:0] selected;

  always_ff @(posedge rx_clk or negedge rst_n)
    if (!rst_n) aligned <= '0;
    else        aligned <= rxd;

  always_ff @(negedge phi or negedge rst_n)
    if (!rst_n) samp_0 <= '0;
    else        samp_0 <= aligned;

  always_ff @(negedge phi_180 or negedge rst_n)
    if (!rst_n) samp_180 <= '0;
    else        samp_180 <= aligned;

  always_comb selected = rf ? samp_180 : samp_0;

  always_ff @(posedge ref_clk or negedge rst_n)
    if (!rst_n) stable_data <= '0;
    else        stable_data <= selected;

endmodule
