// wcd_pkg: constants and types shared by the waveform capture device (WCD).
//
// The default sizes follow the design point the paper reports: a 1300-element
// carry chain sampled by a 200 MHz capture clock, and a 512-word capture buffer.
// The control-state encoding and the phase-step hold time are this design's own
// choices (see wcd_control).
package wcd_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  // Carry-chain length K (paper: K = 1300 in the main study, 1740 maximum on the chip).
  localparam int unsigned K_DEFAULT = 1300;
  // Words captured per run (paper: 512 periods, or 512 phase increments).
  localparam int unsigned DEPTH_DEFAULT = 512;
  // Capture clock C is 200 MHz and the PLL reference is 50 MHz, so two reference
  // cycles (the minimum phase-step hold) are 8 cycles of C.
  localparam int unsigned PHASESTEP_CYCLES_DEFAULT = 8;

  // Control-logic states.
  typedef enum logic [2:0] {
    ST_IDLE      = 3'd0,  // waiting for start
    ST_CAPTURE   = 3'd1,  // continuous capture, one word per cycle of C
    ST_CAL_WRITE = 3'd2,  // calibration: store the word for the present phase
    ST_CAL_STEP  = 3'd3,  // calibration: hold the PLL phase-step port high
    ST_CAL_WAIT  = 3'd4,  // calibration: wait for the PLL to report the shift done
    ST_DONE      = 3'd5,  // buffer full, waiting for the host to read it
    ST_CAL_SETTLE = 3'd6  // calibration: let the chain fill with the calibration signal
  } wcd_state_e;

  // Run mode requested by the host.
  typedef enum logic {
    MODE_CAPTURE   = 1'b0,
    MODE_CALIBRATE = 1'b1
  } wcd_mode_e;
endpackage
