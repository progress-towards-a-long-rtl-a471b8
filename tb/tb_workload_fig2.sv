`timescale 1ns/1ps
// tb_workload_fig2: the projected data load of a 128-channel front-end chip.
//
// The projection for a 128-channel chip in the innermost tracking layer is
// roughly 6.5 to 8 kbit per 1 ms pulse train (0.1% noise occupancy plus
// machine background, low threshold between 0.01 and 0.28 mip). This bench
// builds the back end for 128 channels (other sizes at their defaults) and
// runs one 1 ms train with randomly placed hit clusters at a rate chosen to
// give about 7 kbit of 31-bit records (7-bit channel, two 12-bit time
// stamps). It checks against the same kind of reference as the end-to-end
// bench that every record arrives, that nothing overflows or is lost, that
// the load lies in the projected range and that the FIFO drains at one
// record per clock when the reader is always ready.
module tb_workload_fig2;
  import lstfe_pkg::*;

  localparam int    N = 128;
  localparam int    TS_W = 12;
  localparam int    DEPTH = 512;
  localparam int    SETTLE = 74184;
  localparam real   HALF = 168.5;          // 337 ns clock
  localparam real   MIP_FC = 3.84;         // 300 um silicon, about 24000 electrons

  logic clk = 0, rst_n = 0;
  logic [N-1:0] comp_hi, comp_lo;
  logic power_req = 0, train_gate = 0, fe_power_on;
  logic out_valid, out_ready = 0;
  logic [6:0] out_chan;
  logic [TS_W-1:0] out_lead, out_trail;
  train_state_e state;
  logic early_train, ts_wrapped;
  logic [$clog2(DEPTH):0] fifo_level;
  logic [15:0] overflow_count, lost_count;

  lstfe_backend #(.N_CHAN(N)) dut (
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
  // readout consumer, always ready
  int got [int];
  int n_got = 0;
  int first_read = -1, last_read = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      got[key(int'(out_chan), int'(out_lead), int'(out_trail))]++;
      n_got++;
      if (first_read < 0) first_read = cyc;
      last_read = cyc;
    end
  end
  initial out_ready = 1'b1;

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
      end else if (kind == 3 && t < n_cycles - 60) begin
        // background load spread over 128 strips: clusters and noise hits
        if ($urandom_range(0, 99) < 3)
          inject_cluster($urandom_range(0, N - 1), MIP_FC * (0.8 + $urandom_range(0, 70) / 100.0), 0.15);
        if ($urandom_range(0, 99) < 2)
          fe.inject($urandom_range(0, N - 1), MIP_FC * (0.25 + $urandom_range(0, 15) / 100.0));
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
    real kbit;
    wait_cycles(5);
    rst_n = 1;
    wait_cycles(5);
    clear_books();
    power_req = 1; @(negedge clk); power_req = 0;
    while (state != ST_READY) @(negedge clk);
    wait_cycles(20);
    run_train(3, 2968);
    n = 0;
    while (state != ST_OFF && n < 10000) begin @(negedge clk); n++; end
    compare_all("128-channel train");
    chk(overflow_count == 0 && lost_count == 0, "no overflow, no lost record");
    kbit = n_got * (7 + 2 * TS_W) / 1000.0;
    $display("load: %0d records = %0.2f kbit per train; readout took %0d cycles",
             n_got, kbit, last_read - first_read + 1);
    chk(kbit > 6.0 && kbit < 9.0, "load within the projected 6-9 kbit per train");
    chk(last_read - first_read + 1 == n_got, "one record per clock during readout");
    $display("mechanisms: neighbour-enabled=%0d suppressed=%0d simultaneous-trailing=%0d",
             m_neighbor, m_suppressed, m_simul);
    chk(m_neighbor > 0 && m_suppressed > 0 && m_simul > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
