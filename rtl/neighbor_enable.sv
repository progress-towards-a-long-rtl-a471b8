`timescale 1ns/1ps
// neighbor_enable: opens the low-threshold readout around high-threshold hits.
//
// A channel's low-threshold pulse is worth reading out only if a strip in
// its vicinity (itself included) crosses the high threshold: the small
// signals on neighbouring strips then refine the cluster centroid, while
// isolated low-threshold noise is suppressed. en[i] is high while any
// channel j with |i-j| <= RADIUS has its synchronized high-threshold
// comparator output high. Channels beyond the chip edge do not exist.
// Purely combinational. The paper says "in the vicinity"; RADIUS = 1
// (nearest neighbours) is this design's choice.
module neighbor_enable #(
  parameter int unsigned N_CHAN = lstfe_pkg::N_CHAN_DEF,
  parameter int unsigned RADIUS = lstfe_pkg::RADIUS_DEF
) (
  input  logic [N_CHAN-1:0] hi,   // synchronized high-threshold levels
  output logic [N_CHAN-1:0] en    // low-threshold readout enabled
);

  always_comb begin
    en = '0;
    for (int i = 0; i < int'(N_CHAN); i++) begin
      for (int j = i - int'(RADIUS); j <= i + int'(RADIUS); j++) begin
        if (j >= 0 && j < int'(N_CHAN)) en[i] = en[i] | hi[j];
      end
    end
  end

endmodule
