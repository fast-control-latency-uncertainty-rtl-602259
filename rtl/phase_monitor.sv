// phase_monitor -- turns TDC codes into bin numbers and keeps their minimum
// and maximum.
//
// Each valid code v is decoded to value = (number of bits equal to v[0] + 3)
// mod 8. For the sample positions of the tdc module this is
// floor(delay of the hit edge after the work-clock edge / 45 degrees), so a
// hit edge less than one bin after the work-clock edge gives 0. While enable
// and gate are high every valid code updates min_val/max_val and sets seen;
// while enable is low the statistics are cleared (min 7, max 0, seen 0).
// gate lets the controller ignore codes while the SerDes is off or settling.
// enable and gate are synchronised into the clk domain by two flip-flops.
//
// Keeping <min,max> and clearing it by disabling follow the published
// method; the decoding rule and the synchroniser are this design's own.
//
// Timing: min_val/max_val reflect a code two clk cycles after v_valid.
`timescale 1ns/1ps
module phase_monitor
  import etof_fc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       gate,
  input  logic [7:0] v,
  input  logic       v_valid,
  output bin_t       value,
  output bin_t       min_val,
  output bin_t       max_val,
  output logic       seen
);

  logic [1:0] en_sync, gate_sync;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      en_sync   <= '0;
      gate_sync <= '0;
    end else begin
      en_sync   <= {en_sync[0], enable};
      gate_sync <= {gate_sync[0], gate};
    end

  // Decoder
  bin_t dec;
  always_comb begin
    logic [3:0] same;
    same = '0;
    for (int k = 0; k < 8; k++) same += 4'(v[k] == v[0]);
    dec = bin_t'(same + 4'd3);
  end

  logic dec_valid;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      value     <= '0;
      dec_valid <= 1'b0;
    end else begin
      dec_valid <= v_valid;
      if (v_valid) value <= dec;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      min_val <= '1;
      max_val <= '0;
      seen    <= 1'b0;
    end else if (!en_sync[1]) begin
      min_val <= '1;
      max_val <= '0;
      seen    <= 1'b0;
    end else if (dec_valid && gate_sync[1]) begin
      seen <= 1'b1;
      if (value < min_val) min_val <= value;
      if (value > max_val) max_val <= value;
    end

endmodule
