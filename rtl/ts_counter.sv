`timescale 1ns/1ps
// ts_counter: time-stamp counter for one pulse train.
//
// Counts back-end clock ticks from the start of the pulse train. clear
// (one cycle, at the start of acquisition) sets it to zero; while run is
// high it increments once per clock. With the clock taken at the 337 ns
// bunch spacing one tick is one bunch crossing, which meets the paper's
// time-resolution goal of better than 500 ns. If the count passes its
// largest value it wraps and the sticky flag wrapped is set (cleared by
// clear), so a reader can tell that time stamps became ambiguous.
// The width and the tick period are this design's choices.
module ts_counter #(
  parameter int unsigned TS_W = lstfe_pkg::TS_W_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,    // restart at zero, clear the wrap flag
  input  logic            run,      // count this cycle
  output logic [TS_W-1:0] ts,       // current time stamp
  output logic            wrapped   // sticky: the count wrapped since clear
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts      <= '0;
      wrapped <= 1'b0;
    end else if (clear) begin
      ts      <= '0;
      wrapped <= 1'b0;
    end else if (run) begin
      ts <= ts + 1'b1;
      if (&ts) wrapped <= 1'b1;
    end
  end

endmodule
