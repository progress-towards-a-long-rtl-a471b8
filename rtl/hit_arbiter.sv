`timescale 1ns/1ps
// hit_arbiter: round-robin choice of one pending channel record per cycle.
//
// The chip-wide FIFO takes one record per clock, but several channels may
// finish a pulse in the same cycle (a cluster of neighbouring strips ends
// almost together). The arbiter grants one pending channel per cycle,
// searching upward from the channel after the last one granted, so no
// channel waits more than N_CHAN cycles. grant is one-hot (or zero when
// nothing is pending) and combinational from pend; gnt_idx is its index.
// The paper only says the FIFO serves the whole chip; the round-robin
// policy is this design's choice.
module hit_arbiter #(
  parameter int unsigned N_CHAN = lstfe_pkg::N_CHAN_DEF,
  localparam int unsigned CH_W  = (N_CHAN > 1) ? $clog2(N_CHAN) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_CHAN-1:0] pend,
  output logic [N_CHAN-1:0] grant,
  output logic [CH_W-1:0]   gnt_idx,
  output logic              gnt_valid
);

  logic [CH_W-1:0] last_q;   // channel granted most recently

  always_comb begin
    logic [CH_W-1:0] c;
    grant     = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int unsigned k = 1; k <= N_CHAN; k++) begin
      c = CH_W'((int'(last_q) + k) % N_CHAN);
      if (!gnt_valid && pend[c]) begin
        gnt_valid = 1'b1;
        gnt_idx   = CH_W'(c);
        grant[c]  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         last_q <= CH_W'(N_CHAN - 1);
    else if (gnt_valid) last_q <= gnt_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_only_pending: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~pend) == '0);

endmodule
