// tdc_sample_block -- one of the four sample blocks of the TDC.
//
// hit is sampled on the rising edges of one phase clk_i of the doubled work
// clock and shifted once more in that domain, then retimed through three
// flip-flops on df_clk[0] (clk_0). q[1] is taken after the fourth flip-flop
// and q[0] after the fifth, so at a work-clock edge q[1] holds the sample
// taken at phase i * 45 degrees and q[0] the one taken half a work-clock
// period earlier. The five-flip-flop chain and the clock of each flip-flop
// follow the published schematic; the asynchronous reset is this design's own.
`timescale 1ns/1ps
module tdc_sample_block (
  input  logic       rst_n,
  input  logic       clk_i,
  input  logic       clk_0,
  input  logic       hit,
  output logic [1:0] q
);

  logic s1, s2, s3, s4, s5;

  always_ff @(posedge clk_i or negedge rst_n)
    if (!rst_n) {s1, s2} <= '0;
    else        {s1, s2} <= {hit, s1};

  always_ff @(posedge clk_0 or negedge rst_n)
    if (!rst_n) {s3, s4, s5} <= '0;
    else        {s3, s4, s5} <= {s2, s3, s4};

  assign q = {s4, s5};

endmodule
