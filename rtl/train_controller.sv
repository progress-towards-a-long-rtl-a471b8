`timescale 1ns/1ps
// train_controller: sequences one ILC pulse-train cycle of the readout.
//
// The ILC delivers 1 ms pulse trains at 5 Hz. To avoid active cooling the
// front-end chip is powered only around the train, through its power-cycling
// control line, and the chip-wide FIFO is read out after the train ends.
// This controller steps through:
//
//   OFF      front end unpowered. power_req or train_gate -> SETTLE.
//   SETTLE   fe_power_on high; waits SETTLE_CYCLES clocks for the bias
//            levels to recover -> READY. If train_gate rises first the
//            train is acquired anyway and early_train is flagged.
//   READY    powered and settled; train_gate -> ACQUIRE.
//   ACQUIRE  time stamps run from zero (ts_clear just before entry) and hits are
//            recorded while train_gate is high; its fall -> READOUT.
//   READOUT  front end powered off; readout_en high until the FIFO and
//            every pending channel record are drained (drained) -> OFF.
//
// early_train is sticky until the next ACQUIRE entry that was settled.
// The paper gives the need (turn-on and turn-off within the train duty
// cycle, FIFO read out at the end of the train, control lines for power
// cycling) and the measured turn-on time of about 25 ms; the state machine,
// the power_req input and the behaviour on an early train are this design's
// choices. fe_power_on, acquire and readout_en decode the state register;
// ts_clear is high in the cycle before ACQUIRE so that the first ACQUIRE
// cycle sees time stamp 0.
module train_controller #(
  parameter int unsigned SETTLE_CYCLES = lstfe_pkg::SETTLE_DEF,
  localparam int unsigned SW = (SETTLE_CYCLES > 1) ? $clog2(SETTLE_CYCLES + 1) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    power_req,    // machine warning: a train is coming
  input  logic                    train_gate,   // high for the duration of the train
  input  logic                    drained,      // FIFO empty and no record pending
  output lstfe_pkg::train_state_e state,
  output logic                    fe_power_on,  // front-end power-cycling control line
  output logic                    acquire,
  output logic                    ts_clear,     // one cycle, just before ACQUIRE begins
  output logic                    readout_en,
  output logic                    early_train   // last train began before settling ended
);

  import lstfe_pkg::*;

  train_state_e    nxt;
  logic [SW-1:0]   settle_cnt;
  logic            settle_done;

  assign settle_done = (settle_cnt >= SW'(SETTLE_CYCLES - 1));

  always_comb begin
    nxt = state;
    unique case (state)
      ST_OFF:     if (power_req || train_gate) nxt = ST_SETTLE;
      ST_SETTLE:  if (train_gate)              nxt = ST_ACQUIRE;
                  else if (settle_done)        nxt = ST_READY;
      ST_READY:   if (train_gate)              nxt = ST_ACQUIRE;
      ST_ACQUIRE: if (!train_gate)             nxt = ST_READOUT;
      ST_READOUT: if (drained)                 nxt = ST_OFF;
      default:                                 nxt = ST_OFF;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_OFF;
      settle_cnt  <= '0;
      early_train <= 1'b0;
    end else begin
      state    <= nxt;
      if (state == ST_SETTLE && !settle_done) settle_cnt <= settle_cnt + 1'b1;
      else if (state != ST_SETTLE)            settle_cnt <= '0;
      if (state == ST_SETTLE && nxt == ST_ACQUIRE) early_train <= 1'b1;
      else if (state == ST_READY && nxt == ST_ACQUIRE) early_train <= 1'b0;
    end
  end

  always_comb begin
    fe_power_on = (state == ST_SETTLE) || (state == ST_READY) || (state == ST_ACQUIRE);
    acquire     = (state == ST_ACQUIRE);
    readout_en  = (state == ST_READOUT);
    ts_clear    = (nxt == ST_ACQUIRE) && (state != ST_ACQUIRE);
  end

endmodule
