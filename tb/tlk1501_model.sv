// tlk1501_model -- behavioural model of a SerDes link (transmitter, fibre
// and receiver) as seen by the receiving FPGA, for simulation only.
//
// Every rising edge of tx_clk sends the word txd. The receiver's recovered
// clock rx_clk is tx_clk delayed by delta_ps (cable and channel skew) plus
// idx * RANGE_PS / (PHASES-1), where idx (0..PHASES-1) is drawn with $urandom
// each time enable rises, or set by force_idx when that is 0..PHASES-1. rxd
// carries the word sent at that tx_clk edge and changes CLK_Q_PS after the
// rx_clk rising edge. While enable is low rx_clk stays low and rxd is 0.
// Ten phases over 10.2 ns follow the published description of the
// recovered clock; everything else is a modelling choice.
`timescale 1ns/1ps
module tlk1501_model #(
  parameter int unsigned PERIOD_PS = 24000,
  parameter int unsigned PHASES    = 10,
  parameter int unsigned RANGE_PS  = 10200,
  parameter int unsigned CLK_Q_PS  = 1000
) (
  input  logic        tx_clk,
  input  logic [15:0] txd,
  input  logic        enable,
  input  int unsigned delta_ps,
  input  int          force_idx,
  output int unsigned idx,
  output logic        rx_clk,
  output logic [15:0] rxd
);

  logic [15:0] rxd_q;
  assign rxd = enable ? rxd_q : '0;

  initial begin
    rx_clk = 1'b0;
    rxd_q  = '0;
    idx    = 0;
  end

  always @(posedge enable) begin
    if (force_idx >= 0 && force_idx < int'(PHASES)) idx <= force_idx;
    else                                             idx <= $urandom_range(PHASES - 1);
  end

  always @(posedge tx_clk) begin
    if (enable) begin
      fork
        begin
          automatic int unsigned d = delta_ps + idx * RANGE_PS / (PHASES - 1);
          automatic logic [15:0] w = txd;
          #(d * 1ps) rx_clk <= 1'b1;
          #(CLK_Q_PS * 1ps) rxd_q <= w;
          #((PERIOD_PS / 2 - CLK_Q_PS) * 1ps) rx_clk <= 1'b0;
        end
      join_none
    end
  end

endmodule
