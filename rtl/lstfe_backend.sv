`timescale 1ns/1ps
// lstfe_backend: digital back end for one LSTFE silicon-strip front-end chip.
//
// The front-end chip gives, per strip, a high-threshold and a low-threshold
// comparator output. Only the high threshold is set above the noise; the
// low threshold is read only for strips near a high-threshold hit. During a
// 1 ms pulse train this back end time-stamps the leading and trailing edge
// of every low-threshold pulse in that enabled region and writes the
// record {channel, leading, trailing} into one FIFO shared by the chip. After
// the train the FIFO is read out as a stream, and the front end is powered
// down until the next train.
//
// Data path:  comp_sync -> neighbor_enable -> hit_capture -> hit_arbiter
//             -> hit_fifo -> out_* stream.   ts_counter gives time stamps,
//             train_controller sequences power, acquisition and readout.
//
// Interface: comp_hi/comp_lo are asynchronous comparator levels. The output
// stream uses valid/ready: a record is transferred on a clock edge with
// out_valid && out_ready; out_valid stays high with the same record until
// it is taken. Records appear only in the READOUT phase. overflow_count
// counts records refused by a full FIFO, fifo_level is
// the number of records held, lost_count records lost because a
// channel's one-entry slot was still occupied, ts_wrapped that the train
// outlasted the time-stamp range.
//
// Latency: a comparator edge reaches hit_capture two clocks later (the
// synchronizer), so time stamps are the edge time plus two ticks, counted
// from the first ACQUIRE cycle. The architecture (enable around high
// threshold hits, edge time stamps, chip-wide FIFO read out after the train,
// power cycling) follows the paper; clock rate, widths, FIFO depth, the
// neighbourhood radius and all handshakes are this design's choices.
module lstfe_backend #(
  parameter int unsigned N_CHAN        = lstfe_pkg::N_CHAN_DEF,
  parameter int unsigned TS_W          = lstfe_pkg::TS_W_DEF,
  parameter int unsigned RADIUS        = lstfe_pkg::RADIUS_DEF,
  parameter int unsigned DEPTH         = lstfe_pkg::DEPTH_DEF,
  parameter int unsigned SETTLE_CYCLES = lstfe_pkg::SETTLE_DEF,
  localparam int unsigned CH_W         = (N_CHAN > 1) ? $clog2(N_CHAN) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // front-end comparator outputs (asynchronous)
  input  logic [N_CHAN-1:0]           comp_hi,
  input  logic [N_CHAN-1:0]           comp_lo,
  // machine timing
  input  logic                        power_req,
  input  logic                        train_gate,
  // front-end power-cycling control line
  output logic                        fe_power_on,
  // readout stream
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [CH_W-1:0]             out_chan,
  output logic [TS_W-1:0]             out_lead,
  output logic [TS_W-1:0]             out_trail,
  // status
  output lstfe_pkg::train_state_e     state,
  output logic                        early_train,
  output logic                        ts_wrapped,
  output logic [$clog2(DEPTH):0]      fifo_level,
  output logic [lstfe_pkg::CNT_W-1:0] overflow_count,
  output logic [lstfe_pkg::CNT_W-1:0] lost_count
);

  typedef struct packed {
    logic [CH_W-1:0] chan;
    logic [TS_W-1:0] lead;
    logic [TS_W-1:0] trail;
  } hit_rec_t;

  localparam int unsigned REC_W = $bits(hit_rec_t);

  logic [N_CHAN-1:0]           hi, lo, lo_rise, lo_fall, en;
  logic [N_CHAN-1:0]           pend, grant;
  logic [N_CHAN-1:0][TS_W-1:0] pend_lead, pend_trail;
  logic [CH_W-1:0]             gnt_idx;
  logic                        gnt_valid;
  logic [TS_W-1:0]             ts;
  logic                        acquire, ts_clear, readout_en;
  logic                        fifo_empty;
  hit_rec_t                    wr_rec, rd_rec;

  comp_sync #(.N_CHAN(N_CHAN)) u_sync (
    .clk, .rst_n,
    .comp_hi_in(comp_hi), .comp_lo_in(comp_lo),
    .hi, .lo, .lo_rise, .lo_fall
  );

  neighbor_enable #(.N_CHAN(N_CHAN), .RADIUS(RADIUS)) u_nbr (
    .hi, .en
  );

  ts_counter #(.TS_W(TS_W)) u_ts (
    .clk, .rst_n, .clear(ts_clear), .run(acquire), .ts, .wrapped(ts_wrapped)
  );

  hit_capture #(.N_CHAN(N_CHAN), .TS_W(TS_W)) u_cap (
    .clk, .rst_n, .acquire, .ts, .lo, .lo_rise, .lo_fall, .en, .grant,
    .pend, .pend_lead, .pend_trail, .lost_count
  );

  hit_arbiter #(.N_CHAN(N_CHAN)) u_arb (
    .clk, .rst_n, .pend, .grant, .gnt_idx, .gnt_valid
  );

  always_comb begin
    wr_rec.chan  = gnt_idx;
    wr_rec.lead  = pend_lead[gnt_idx];
    wr_rec.trail = pend_trail[gnt_idx];
  end

  hit_fifo #(.W(REC_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(gnt_valid), .wr_data(wr_rec),
    .rd_en(out_valid && out_ready), .rd_data(rd_rec),
    .empty(fifo_empty), .full(), .count(fifo_level),
    .drop_count(overflow_count)
  );

  train_controller #(.SETTLE_CYCLES(SETTLE_CYCLES)) u_ctrl (
    .clk, .rst_n, .power_req, .train_gate,
    .drained(fifo_empty && !(|pend)),
    .state, .fe_power_on, .acquire, .ts_clear, .readout_en, .early_train
  );

  always_comb begin
    out_valid = readout_en && !fifo_empty;
    out_chan  = rd_rec.chan;
    out_lead  = rd_rec.lead;
    out_trail = rd_rec.trail;
  end

  // valid/ready: an offered record stays offered, unchanged, until taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable({out_chan, out_lead, out_trail}));

endmodule
