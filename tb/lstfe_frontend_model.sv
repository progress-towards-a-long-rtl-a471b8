`timescale 1ns/1ps
// lstfe_frontend_model: behavioural model of the analog LSTFE front-end chip,
// for simulation only (not synthesizable).
//
// Each channel is a charge amplifier and CR-RC shaper followed by two
// comparators. A charge q (fC) injected on a channel with inject() adds a
// pulse v(t) = GAIN * q * (t/TAU) * exp(1 - t/TAU), which peaks at GAIN*q
// (140 mV/fC) one shaping time (3 us) after the charge arrives. The
// comparator outputs comp_hi / comp_lo are high while the summed pulse
// height of the channel is above HI_MV / LO_MV. The model re-evaluates the
// pulses shortly after every rising clock edge. With power_on low the
// comparator outputs are held low and injected charge is ignored.
// The gain and shaping time follow the published front end; thresholds,
// the ideal shaper (no saturation, no noise) and evaluation on clock edges
// are choices of this model.
module lstfe_frontend_model #(
  parameter int  N_CHAN = 8,
  parameter real GAIN_MV_PER_FC = 140.0,
  parameter real TAU_NS = 3000.0,
  parameter real HI_MV = 270.0,
  parameter real LO_MV = 80.0,
  parameter int  MAXP = 16            // pulses remembered per channel
) (
  input  logic              clk,
  input  logic              power_on,
  output logic [N_CHAN-1:0] comp_hi,
  output logic [N_CHAN-1:0] comp_lo
);

  real t0  [N_CHAN][MAXP];
  real amp [N_CHAN][MAXP];
  int  wr  [N_CHAN];

  initial begin
    comp_hi = '0;
    comp_lo = '0;
    for (int c = 0; c < N_CHAN; c++) begin
      wr[c] = 0;
      for (int k = 0; k < MAXP; k++) begin t0[c][k] = -1.0e12; amp[c][k] = 0.0; end
    end
  end

  // Inject charge q_fc (fC) on channel ch now.
  task automatic inject(input int ch, input real q_fc);
    if (power_on && ch >= 0 && ch < N_CHAN) begin
      t0[ch][wr[ch]]  = $realtime;
      amp[ch][wr[ch]] = GAIN_MV_PER_FC * q_fc;
      wr[ch] = (wr[ch] + 1) % MAXP;
    end
  endtask

  function automatic real height(input int ch, input real t);
    real v = 0.0, x;
    for (int k = 0; k < MAXP; k++) begin
      x = (t - t0[ch][k]) / TAU_NS;
      if (x > 0.0 && x < 20.0) v += amp[ch][k] * x * $exp(1.0 - x);
    end
    return v;
  endfunction

  always @(posedge clk) begin
    #1;
    for (int c = 0; c < N_CHAN; c++) begin
      real v;
      v = height(c, $realtime);
      comp_hi[c] = power_on && (v > HI_MV);
      comp_lo[c] = power_on && (v > LO_MV);
    end
  end

endmodule
