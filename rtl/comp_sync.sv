`timescale 1ns/1ps
// comp_sync: brings the comparator outputs of the front-end chip into the
// back-end clock domain and finds the edges of the low-threshold pulses.
//
// Each LSTFE channel has a high-threshold and a low-threshold comparator
// whose outputs are asynchronous levels. Both pass through a two-flop
// synchronizer. For the low-threshold level a third flop keeps the previous
// synchronized value, so that lo_rise / lo_fall are one-cycle pulses marking
// the leading and trailing edge of each pulse above the low threshold.
//
// Timing: hi/lo follow the pins two clock edges later; lo_rise/lo_fall are
// high in the same cycle in which lo changes. The synchronizer depth and the
// sampling of the levels are this design's choice; the paper only states
// that leading- and trailing-edge times are recorded.
module comp_sync #(
  parameter int unsigned N_CHAN = lstfe_pkg::N_CHAN_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_CHAN-1:0] comp_hi_in,   // asynchronous, high-threshold comparators
  input  logic [N_CHAN-1:0] comp_lo_in,   // asynchronous, low-threshold comparators
  output logic [N_CHAN-1:0] hi,           // synchronized high-threshold level
  output logic [N_CHAN-1:0] lo,           // synchronized low-threshold level
  output logic [N_CHAN-1:0] lo_rise,      // leading edge of a low-threshold pulse
  output logic [N_CHAN-1:0] lo_fall       // trailing edge of a low-threshold pulse
);

  logic [N_CHAN-1:0] hi_meta, lo_meta, lo_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_meta <= '0;
      hi      <= '0;
      lo_meta <= '0;
      lo      <= '0;
      lo_prev <= '0;
    end else begin
      hi_meta <= comp_hi_in;
      hi      <= hi_meta;
      lo_meta <= comp_lo_in;
      lo      <= lo_meta;
      lo_prev <= lo;
    end
  end

  always_comb begin
    lo_rise = lo & ~lo_prev;
    lo_fall = ~lo & lo_prev;
  end

endmodule
