// etof_fc_pkg -- constants and types shared by the ETOF fast-control
// latency-uncertainty elimination logic.
//
// The global clock period (24 ns), the 200 ps phase-shift resolution, the
// 120 steps per clock cycle, the 45-degree TDC bin (15 steps), the 81-degree
// capture offset (27 steps) and the 180-degree reversal (60 steps) follow the
// published method. The controller state encoding and the CSR map are this
// design's own choices.
`timescale 1ns/1ps
package etof_fc_pkg;

  // Clock and phase-shift geometry
  localparam int unsigned PERIOD_PS     = 24000; // global clock period
  localparam int unsigned STEP_PS       = 200;   // phase-shift resolution
  localparam int unsigned STEPS         = 120;   // steps per clock cycle
  localparam int unsigned STEPS_PER_BIN = 15;    // one 45-degree TDC bin
  localparam int unsigned OFFSET_STEPS  = 27;    // 81 degrees
  localparam int unsigned HALF_STEPS    = 60;    // 180 degrees

  localparam int unsigned DATA_W  = 16;          // recovered data width
  localparam int unsigned PHASE_W = 7;           // holds 0..STEPS-1
  localparam int unsigned BIN_W   = 3;           // TDC bin 0..7

  typedef logic [PHASE_W-1:0] phase_t;
  typedef logic [BIN_W-1:0]   bin_t;

  // Controller states
  typedef enum logic [2:0] {
    S_IDLE,     // waiting for start
    S_OFF,      // SerDes disabled
    S_LOCK,     // SerDes enabled, waiting for the link to settle
    S_MEAS,     // phase monitor collecting
    S_EVAL,     // look at <min,max>
    S_SHIFT,    // stepping the phase-shift PLL
    S_DONE      // locked: capture position fixed
  } ctrl_state_t;

  // CSR addresses
  typedef enum logic [1:0] {
    CSR_CTRL   = 2'd0,
    CSR_STATUS = 2'd1,
    CSR_MINMAX = 2'd2,
    CSR_PHASE  = 2'd3
  } csr_addr_t;

  // Status collected by the controller for the CSRs
  typedef struct packed {
    logic   error;
    logic   locked;
    logic   busy;
    logic   rf;
    logic   seen;
    bin_t   max_val;
    bin_t   min_val;
    phase_t phase;
  } cal_status_t;

endpackage
