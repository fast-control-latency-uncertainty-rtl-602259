// tdc -- multi-phase clock interpolation TDC that measures where the edges
// of hit_src_clk fall within a cycle of the work clock, in eight 45-degree
// (3 ns) bins.
//
// hit is hit_src_clk divided by two, so it changes once per hit_src_clk
// cycle. Four sample blocks sample hit on the four phases df_clk[3:0] of the
// doubled work clock; each yields two bits, giving eight samples spaced one
// eighth of a work-clock period apart. Read at a work-clock edge E, the code
// is v[k] = hit at E - 2 cycles + (k*45 - 180) degrees, a thermometer code
// with one transition whose position is the phase of the hit edge (decoded
// by phase_monitor). The valid generator synchronises hit through three
// flip-flops on work_clk and detects its rising edge; that enables the output
// register, so v is updated once every two work-clock cycles and v_valid is
// high for one cycle after each update.
//
// The four-part structure (clock generation outside, valid generation,
// sample blocks, output register with enable) follows the published
// schematic. The gate of the valid generator is taken here as a rising-edge
// detector, and the sample-to-bit mapping (q[1] to v[4+i], q[0] to v[i]) is
// this design's reading of the schematic.
`timescale 1ns/1ps
module tdc (
  input  logic       rst_n,
  input  logic       work_clk,
  input  logic [3:0] df_clk,
  input  logic       hit_src_clk,
  output logic [7:0] v,
  output logic       v_valid
);

  // Hit generation: divide by two
  logic hit;
  always_ff @(posedge hit_src_clk or negedge rst_n)
    if (!rst_n) hit <= 1'b0;
    else        hit <= ~hit;

  // Valid generation
  logic [2:0] vsync;
  logic       valid;
  always_ff @(posedge work_clk or negedge rst_n)
    if (!rst_n) vsync <= '0;
    else        vsync <= {vsync[1:0], hit};
  assign valid = vsync[1] & ~vsync[2];

  // Sample blocks
  logic [1:0] q [4];
  for (genvar i = 0; i < 4; i++) begin : g_sb
    tdc_sample_block u_sb (
      .rst_n (rst_n),
      .clk_i (df_clk[i]),
      .clk_0 (df_clk[0]),
      .hit   (hit),
      .q     (q[i])
    );
  end

  // Output register block
  always_ff @(posedge work_clk or negedge rst_n)
    if (!rst_n) begin
      v       <= '0;
      v_valid <= 1'b0;
    end else begin
      v_valid <= valid;
      if (valid) v <= {q[3][1], q[2][1], q[1][1], q[0][1],
                       q[3][0], q[2][0], q[1][0], q[0][0]};
    end

endmodule
