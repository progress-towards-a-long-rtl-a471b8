`timescale 1ns/1ps
// hit_capture: per-channel time stamping of low-threshold pulses.
//
// For every channel this block holds the leading-edge time stamp of the
// low-threshold pulse in progress and a flag that records whether the
// channel was enabled (a high-threshold crossing within the vicinity, from
// neighbor_enable) at any time while the pulse lasted. At the trailing edge
// an enabled pulse becomes a pending record {leading, trailing time stamp};
// a pulse that was never enabled is dropped. Pending records wait in a
// one-entry slot per channel until hit_arbiter grants them a write into the
// chip-wide FIFO.
//
// The paper states that channels in the enabled region that cross the
// (low) threshold have their leading- and trailing-edge time stamps written
// to the FIFO. Deciding at the trailing edge, so that a low-threshold
// leading edge that comes before the neighbour's high-threshold crossing is
// still kept, is this design's choice. So are: only pulses that both begin
// and end while acquire is high are recorded; a pulse that ends while the
// channel's slot is still occupied and not granted this cycle is lost and
// counted in lost_count (saturating).
//
// Timing: a record becomes pending the cycle after lo_fall; a grant frees
// the slot the next cycle, and a new record may be loaded in that same
// cycle.
module hit_capture #(
  parameter int unsigned N_CHAN = lstfe_pkg::N_CHAN_DEF,
  parameter int unsigned TS_W   = lstfe_pkg::TS_W_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        acquire,               // train in progress
  input  logic [TS_W-1:0]             ts,                    // current time stamp
  input  logic [N_CHAN-1:0]           lo,                    // synchronized low-threshold level
  input  logic [N_CHAN-1:0]           lo_rise,
  input  logic [N_CHAN-1:0]           lo_fall,
  input  logic [N_CHAN-1:0]           en,                    // from neighbor_enable
  input  logic [N_CHAN-1:0]           grant,                 // one-hot, from hit_arbiter
  output logic [N_CHAN-1:0]           pend,                  // record waiting
  output logic [N_CHAN-1:0][TS_W-1:0] pend_lead,
  output logic [N_CHAN-1:0][TS_W-1:0] pend_trail,
  output logic [lstfe_pkg::CNT_W-1:0] lost_count
);

  logic [N_CHAN-1:0]           active;    // a pulse that began during acquire is open
  logic [N_CHAN-1:0]           enabled;   // vicinity saw a high-threshold crossing
  logic [N_CHAN-1:0][TS_W-1:0] lead_q;
  logic [N_CHAN-1:0]           close_ok;  // trailing edge of an enabled open pulse
  logic [N_CHAN-1:0]           slot_free;
  logic [N_CHAN-1:0]           lost;
  logic [lstfe_pkg::CNT_W:0]   lost_sum;

  always_comb begin
    close_ok  = lo_fall & active & (enabled | en) & {N_CHAN{acquire}};
    slot_free = ~pend | grant;
    lost      = close_ok & ~slot_free;
    lost_sum  = {1'b0, lost_count};
    for (int i = 0; i < int'(N_CHAN); i++) lost_sum = lost_sum + (lstfe_pkg::CNT_W+1)'(lost[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= '0;
      enabled    <= '0;
      lead_q     <= '0;
      pend       <= '0;
      pend_lead  <= '0;
      pend_trail <= '0;
      lost_count <= '0;
    end else begin
      for (int i = 0; i < int'(N_CHAN); i++) begin
        // open pulse tracking
        if (!acquire) begin
          active[i]  <= 1'b0;
          enabled[i] <= 1'b0;
        end else if (lo_rise[i]) begin
          active[i]  <= 1'b1;
          enabled[i] <= en[i];
          lead_q[i]  <= ts;
        end else if (lo_fall[i]) begin
          active[i]  <= 1'b0;
          enabled[i] <= 1'b0;
        end else if (active[i] && lo[i]) begin
          enabled[i] <= enabled[i] | en[i];
        end
        // pending slot
        if (close_ok[i] && slot_free[i]) begin
          pend[i]       <= 1'b1;
          pend_lead[i]  <= lead_q[i];
          pend_trail[i] <= ts;
        end else if (grant[i]) begin
          pend[i] <= 1'b0;
        end
      end
      // saturating count of lost records
      lost_count <= lost_sum[lstfe_pkg::CNT_W] ? '1 : lost_sum[lstfe_pkg::CNT_W-1:0];
    end
  end

endmodule
