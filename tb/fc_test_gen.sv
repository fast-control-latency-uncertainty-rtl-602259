// fc_test_gen -- model of the fast control test signal generator.
//
// Emits a test pulse four clock cycles wide; the gap to the next pulse is
// taken from a 7-bit maximal-length LFSR (x^7 + x^6 + 1), so it varies
// pseudo-randomly between 1 and 127 clocks and the whole period stays within
// 4 + 128 clocks. txd = {cycle counter[14:0], pulse}: the counter lets a
// testbench measure the link latency word by word.
// Pulse width, 7-bit LFSR and the 128-clock bound follow the published test
// set-up; the polynomial and the word layout are modelling choices.
`timescale 1ns/1ps
module fc_test_gen (
  input  logic        clk,
  input  logic        rst_n,
  output logic [15:0] txd,
  output logic        pulse
);

  logic [6:0]  lfsr;
  logic [7:0]  cnt;
  logic [14:0] cyc;
  logic        high;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lfsr <= 7'h5A;
      cnt  <= '0;
      high <= 1'b0;
      cyc  <= '0;
    end else begin
      cyc <= cyc + 15'd1;
      cnt <= cnt + 8'd1;
      if (high && cnt == 8'd3) begin
        high <= 1'b0;
        cnt  <= '0;
      end else if (!high && cnt >= {1'b0, lfsr}) begin
        high <= 1'b1;
        cnt  <= '0;
        lfsr <= {lfsr[5:0], lfsr[6] ^ lfsr[5]};
      end
    end

  assign pulse = high;
  assign txd   = {cyc, high};

endmodule
