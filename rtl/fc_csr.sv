// fc_csr -- control and status registers of the re-capture logic, read and
// written from the board's VME interface through a simple synchronous
// register bus.
//
// Map (bus_addr):
//   0 CTRL   write bit 0 = 1: start a calibration (one-cycle pulse on start)
//   1 STATUS read {12'b0, error, locked, busy, rf}
//   2 MINMAX read {9'b0, seen, max_val[2:0], min_val[2:0]}
//   3 PHASE  read {9'b0, phase[6:0]}  (phase-shift PLL steps of 200 ps)
// bus_rdata is registered: valid the cycle after bus_addr.
//
// Only the existence of CSRs reachable over VME is published; the bus and the
// register map are this design's own.
`timescale 1ns/1ps
module fc_csr
  import etof_fc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  bus_addr,
  input  logic        bus_wr,
  input  logic [15:0] bus_wdata,
  output logic [15:0] bus_rdata,
  input  cal_status_t status,
  output logic        start
);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      start     <= 1'b0;
      bus_rdata <= '0;
    end else begin
      start <= bus_wr && (csr_addr_t'(bus_addr) == CSR_CTRL) && bus_wdata[0];
      unique case (csr_addr_t'(bus_addr))
        CSR_CTRL:   bus_rdata <= '0;
        CSR_STATUS: bus_rdata <= {12'b0, status.error, status.locked, status.busy, status.rf};
        CSR_MINMAX: bus_rdata <= {9'b0, status.seen, status.max_val, status.min_val};
        CSR_PHASE:  bus_rdata <= {9'b0, status.phase};
        default:    bus_rdata <= '0;
      endcase
    end

endmodule
