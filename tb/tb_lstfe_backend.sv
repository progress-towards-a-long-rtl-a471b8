`timescale 1ns/1ps
// tb_lstfe_backend: end-to-end test of the back end at its default sizes
// (8 channels, 12-bit time stamps, 512-word FIFO, 25 ms settling), driven by
// the behavioural front-end model with a 337 ns clock.
//
// Three pulse-train cycles are run:
//   1. physics: hit clusters (a strip above the high threshold with smaller
//      charge on its neighbours), isolated low-threshold noise and
//      overlapping clusters, after a full power-up settling wait;
//   2. overload: every strip hit every ~14 us, so the FIFO overflows;
//   3. early train: the train starts before settling has ended.
// A reference, written from the comparator waveforms alone, delays them by
// the two synchronizer cycles, follows every low-threshold pulse, keeps it
// when a high-threshold level was present on the strip or a neighbour
// during the pulse, and predicts the set of {channel, leading, trailing}
// records. The readout consumer applies random back-pressure. Each
// mechanism (neighbour enable, suppression, simultaneous trailing edges,
// overflow, settling wait, early train, back-pressure) must occur at least
// once.
module tb_lstfe_backend;
  import lstfe_pkg::*;

  localparam int    N = 8;
  localparam int    TS_W = 12;
  localparam int    DEPTH = 512;
  localparam int    SETTLE = 74184;
  localparam real   HALF = 168.5;          // 337 ns clock
  localparam real   MIP_FC = 3.84;         // 300 um silicon, about 24000 electrons

  logic clk = 0, rst_n = 0;
  logic [N-1:0] comp_hi, comp_lo;
  logic power_req = 0, train_gate = 0, fe_power_on;
  logic out_valid, out_ready = 0;
  logic [2:0] out_chan;
  logic [TS_W-1:0] out_lead, out_trail;
  train_state_e state;
  logic early_train, ts_wrapped;
  logic [$clog2(DEPTH):0] fifo_level;
  logic [15:0] overflow_count, lost_count;

  lstfe_backend dut (
    .clk, .rst_n, .comp_hi, .comp_lo, .power_req, .train_gate, .fe_power_on,
    .out_valid, .out_ready, .out_chan, .out_lead, .out_trail,
    .state, .early_train, .ts_wrapped, .fifo_level, .overflow_count, .lost_count
  );

  lstfe_frontend_model #(.N_CHAN(N)) fe (.clk, .power_on(fe_power_on), .comp_hi, .comp_lo);

  always #(HALF) clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_neighbor = 0, m_suppressed = 0, m_simul = 0, m_overflow = 0, m_settle = 0;
  int m_early = 0, m_backpressure = 0, m_records = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #300ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // reference model, evaluated at every falling edge
  logic [N-1:0] raw_hi [3], raw_lo [3];   // [0] this cycle, [k] k cycles ago
  logic [N-1:0] prev_lo_s = '0;
  bit           exp_acq = 0;
  int           ts_ref = 0;
  bit           r_active [N], r_enabled [N], r_selfhi [N];
  int           r_lead [N];
  int           expected [int];             // record key -> count
  int           n_expected = 0;

  function automatic int key(input int ch, input int lead, input int trail);
    return (ch << (2 * TS_W)) | (lead << TS_W) | trail;
  endfunction

  initial begin
    foreach (r_active[i]) begin r_active[i] = 0; r_enabled[i] = 0; r_selfhi[i] = 0; end
    for (int k = 0; k < 3; k++) begin raw_hi[k] = '0; raw_lo[k] = '0; end
    forever begin
      @(negedge clk);
      for (int k = 2; k > 0; k--) begin raw_hi[k] = raw_hi[k-1]; raw_lo[k] = raw_lo[k-1]; end
      raw_hi[0] = comp_hi; raw_lo[0] = comp_lo;
      if (rst_n) begin
        logic [N-1:0] s_hi, s_lo, en;
        int closes;
        s_hi = raw_hi[2]; s_lo = raw_lo[2];
        // acquisition runs in the cycles after an edge that saw the gate high
        chk((state == ST_ACQUIRE) == exp_acq, "acquire phase follows train_gate");
        if (exp_acq) begin
          closes = 0;
          for (int i = 0; i < N; i++) begin
            en[i] = 1'b0;
            for (int j = i - 1; j <= i + 1; j++) if (j >= 0 && j < N && s_hi[j]) en[i] = 1'b1;
          end
          for (int i = 0; i < N; i++) begin
            bit rise, fall;
            rise = s_lo[i] && !prev_lo_s[i];
            fall = !s_lo[i] && prev_lo_s[i];
            if (rise) begin
              r_active[i] = 1; r_enabled[i] = en[i]; r_selfhi[i] = s_hi[i]; r_lead[i] = ts_ref;
            end else if (fall && r_active[i]) begin
              r_active[i] = 0;
              if (r_enabled[i] || en[i]) begin
                expected[key(i, r_lead[i], ts_ref)]++;
                n_expected++;
                closes++;
                if (!r_selfhi[i] && !s_hi[i]) m_neighbor++;
              end else begin
                m_suppressed++;
              end
            end else if (r_active[i] && s_lo[i]) begin
              r_enabled[i] |= en[i];
              r_selfhi[i]  |= s_hi[i];
            end
          end
          if (closes > 1) m_simul++;
          ts_ref++;
        end else begin
          foreach (r_active[i]) r_active[i] = 0;
          ts_ref = 0;
        end
        prev_lo_s = s_lo;
        // the gate value this falling edge is what the next rising edge samples
        exp_acq = (state inside {ST_SETTLE, ST_READY, ST_ACQUIRE}) && train_gate;
      end
    end
  end

  // ------------------------------------------------------------------
  // readout consumer with random back-pressure
  int got [int];
  int n_got = 0;
  always @(negedge clk) begin
    if (out_valid) chk(state == ST_READOUT, "records only offered during readout");
    if (out_valid && !out_ready) m_backpressure++;
    out_ready <= ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      got[key(int'(out_chan), int'(out_lead), int'(out_trail))]++;
      n_got++;
    end
  end

  // ------------------------------------------------------------------
  task automatic inject_cluster(input int c, input real q_fc, input real share);
    fe.inject(c, q_fc);
    if (c > 0)     fe.inject(c - 1, q_fc * share * (0.6 + 0.8 * $urandom_range(0, 100) / 100.0));
    if (c < N - 1) fe.inject(c + 1, q_fc * share * (0.6 + 0.8 * $urandom_range(0, 100) / 100.0));
  endtask

  task automatic wait_cycles(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic clear_books();
    expected.delete(); got.delete(); n_expected = 0; n_got = 0;
  endtask

  // Runs the train, n_cycles long; body chosen by kind.
  task automatic run_train(input int kind, input int n_cycles);
    int t = 0;
    // stimulus changes just after a rising edge, so that the reference,
    // which works at the falling edge, sees what the next rising edge samples
    @(posedge clk); #2 train_gate = 1;
    while (t < n_cycles) begin
      @(posedge clk); #2 t++;
      if (kind == 1 && t < n_cycles - 60) begin
        // physics: clusters now and then, isolated noise, overlapping clusters
        if ($urandom_range(0, 59) == 0)
          inject_cluster($urandom_range(0, N - 1), MIP_FC * (0.8 + $urandom_range(0, 70) / 100.0), 0.15);
        if ($urandom_range(0, 99) == 0)
          fe.inject($urandom_range(0, N - 1), MIP_FC * (0.25 + $urandom_range(0, 15) / 100.0));
        if ($urandom_range(0, 299) == 0) begin
          inject_cluster(1, MIP_FC, 0.2);
          inject_cluster(6, MIP_FC, 0.2);
        end
      end else if (kind == 2 && t < n_cycles - 60) begin
        if (t % 40 == 0) for (int c = 0; c < N; c++) fe.inject(c, MIP_FC);
      end
    end
    train_gate = 0;
  endtask

  task automatic compare_all(input string tag);
    int missing = 0, extra = 0;
    foreach (expected[k]) begin
      int g = got.exists(k) ? got[k] : 0;
      if (g != expected[k]) missing++;
    end
    foreach (got[k]) if (!expected.exists(k)) extra++;
    chk(n_got == n_expected, $sformatf("%s: %0d records read, %0d expected", tag, n_got, n_expected));
    chk(missing == 0 && extra == 0, $sformatf("%s: %0d differing, %0d unexpected records", tag, missing, extra));
    $display("%s: %0d records expected, %0d read", tag, n_expected, n_got);
  endtask

  initial begin
    int n;
    int ovf_before;
    wait_cycles(5);
    rst_n = 1;
    wait_cycles(5);
    chk(state == ST_OFF && !fe_power_on, "off after reset");

    // ---- train 1: physics after a full settling wait
    clear_books();
    power_req = 1; @(negedge clk); power_req = 0;
    n = 0;
    while (state == ST_SETTLE && n < SETTLE + 10) begin
      chk(fe_power_on, "powered while settling"); @(negedge clk); n++;
    end
    chk(n == SETTLE, $sformatf("settled after %0d cycles, expected %0d", n, SETTLE));
    if (n == SETTLE) m_settle++;
    chk(state == ST_READY, "ready after settling");
    wait_cycles(20);
    run_train(1, 2968);                       // 1 ms of 337 ns ticks
    wait_cycles(2);
    chk(state == ST_READOUT && !fe_power_on, "front end off during readout");
    n = 0;
    while (state != ST_OFF && n < 10000) begin @(negedge clk); n++; end
    chk(state == ST_OFF, "readout ends");
    chk(lost_count == 0 && overflow_count == 0, "train 1 without loss");
    chk(!early_train, "train 1 settled");
    chk(!ts_wrapped, "1 ms fits the time stamp");
    compare_all("train 1");
    m_records += n_got;

    // ---- train 2: overload, the FIFO overflows
    clear_books();
    ovf_before = int'(overflow_count);
    power_req = 1; @(negedge clk); power_req = 0;
    wait_cycles(SETTLE + 10);
    run_train(2, 2968);
    n = 0;
    while (state != ST_OFF && n < 10000) begin @(negedge clk); n++; end
    chk(n_expected > DEPTH, $sformatf("overload produced %0d records", n_expected));
    chk(n_got == DEPTH, $sformatf("a full FIFO read out: %0d", n_got));
    chk(int'(overflow_count) - ovf_before == n_expected - DEPTH, "overflow_count counts the refused records");
    chk(lost_count == 0, "no lost records in overload");
    n = 0;
    foreach (got[k]) if (!expected.exists(k) || got[k] > expected[k]) n++;
    chk(n == 0, "every read record was expected");
    if (int'(overflow_count) > ovf_before) m_overflow++;
    m_records += n_got;

    // ---- train 3: starts before the front end has settled
    clear_books();
    power_req = 1; @(negedge clk); power_req = 0;
    wait_cycles(1000);
    run_train(1, 2968);
    n = 0;
    while (state != ST_OFF && n < 10000) begin @(negedge clk); n++; end
    chk(early_train, "early train flagged");
    if (early_train) m_early++;
    compare_all("train 3");
    m_records += n_got;

    // ---- every mechanism seen
    $display("mechanisms: neighbour-enabled=%0d suppressed=%0d simultaneous-trailing=%0d overflow=%0d settle=%0d early=%0d backpressure=%0d records=%0d",
             m_neighbor, m_suppressed, m_simul, m_overflow, m_settle, m_early, m_backpressure, m_records);
    chk(m_neighbor > 0, "neighbour enable exercised");
    chk(m_suppressed > 0, "isolated low-threshold pulse suppressed");
    chk(m_simul > 0, "simultaneous trailing edges arbitrated");
    chk(m_overflow > 0, "FIFO overflow exercised");
    chk(m_settle > 0, "settling wait exercised");
    chk(m_early > 0, "early train exercised");
    chk(m_backpressure > 0, "readout back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
