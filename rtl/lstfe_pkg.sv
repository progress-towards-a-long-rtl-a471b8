`timescale 1ns/1ps
// lstfe_pkg: constants and types shared by the LSTFE back-end readout.
//
// The back end collects hit records from the comparator outputs of one
// LSTFE front-end chip during a 1 ms ILC pulse train and reads them out
// after the train. This package holds the defaults used throughout:
//   * N_CHAN_DEF  - channels per front-end chip (8, as on the LSTFE2
//                   prototype; 128 is the planned full chip).
//   * TS_W_DEF    - time-stamp width. The back-end clock is taken to run at
//                   the 337 ns ILC bunch spacing (this design's choice), so a
//                   1 ms train is 2968 ticks and 12 bits cover it.
//   * SETTLE_DEF  - power-up settling wait in clock ticks: 25 ms, the
//                   turn-on time measured on the prototype, at 337 ns/tick.
//   * train_state_e - the phases of one pulse-train cycle.
package lstfe_pkg;

  localparam int unsigned N_CHAN_DEF   = 8;
  localparam int unsigned TS_W_DEF     = 12;
  localparam int unsigned RADIUS_DEF   = 1;
  localparam int unsigned DEPTH_DEF    = 512;
  localparam int unsigned SETTLE_DEF   = 74184;  // 25 ms / 337 ns
  localparam int unsigned CNT_W        = 16;     // width of status counters

  // Phases of one pulse-train cycle, driven by train_controller.
  typedef enum logic [2:0] {
    ST_OFF      = 3'd0,  // front end powered down between trains
    ST_SETTLE   = 3'd1,  // power restored, waiting for bias levels to settle
    ST_READY    = 3'd2,  // powered and settled, waiting for the train
    ST_ACQUIRE  = 3'd3,  // train in progress: hits are time-stamped
    ST_READOUT  = 3'd4   // train over: front end off, FIFO drained
  } train_state_e;

endpackage
