`timescale 1ns/1ps
// tb_hit_capture: random low-threshold pulses and enables over several
// acquisition windows. A reference keeps, per channel, the pulses seen and
// whether the enable was high at any cycle from leading to trailing edge,
// and predicts each pending record; grants are given at random so that a
// slot is sometimes still occupied when the next pulse ends (lost record).
module tb_hit_capture;
  localparam int N = 8, TS_W = 12;
  logic clk = 0, rst_n = 0, acquire = 0;
  logic [TS_W-1:0] ts = '0;
  logic [N-1:0] lo = '0, lo_prev = '0, lo_rise, lo_fall, en = '0, grant = '0, pend;
  logic [N-1:0][TS_W-1:0] pend_lead, pend_trail;
  logic [15:0] lost_count;

  // reference state
  bit r_active [N], r_enabled [N], r_pend [N];
  int r_lead [N], r_plead [N], r_ptrail [N];
  int r_lost = 0, n_records = 0, n_suppressed = 0;
  int checks = 0, failures = 0;

  hit_capture #(.N_CHAN(N), .TS_W(TS_W)) dut (.clk, .rst_n, .acquire, .ts, .lo, .lo_rise, .lo_fall,
                                              .en, .grant, .pend, .pend_lead, .pend_trail, .lost_count);

  assign lo_rise = lo & ~lo_prev;
  assign lo_fall = ~lo & lo_prev;

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    bit rise, fall, free;
    int c;
    foreach (r_active[i]) begin r_active[i] = 0; r_enabled[i] = 0; r_pend[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // compare DUT state with the reference
      for (int i = 0; i < N; i++) begin
        chk(pend[i] == r_pend[i], $sformatf("pend[%0d]", i));
        if (r_pend[i]) begin
          chk(int'(pend_lead[i]) == r_plead[i], $sformatf("lead[%0d]", i));
          chk(int'(pend_trail[i]) == r_ptrail[i], $sformatf("trail[%0d]", i));
        end
      end
      chk(int'(lost_count) == r_lost, "lost_count");
      // drive the next cycle
      lo_prev = lo;
      ts      = acquire ? ts + 1'b1 : '0;
      acquire = ((cyc % 5000) > 200);
      for (int i = 0; i < N; i++) begin
        if ($urandom_range(0, 9) == 0) lo[i] = ~lo[i];
        en[i] = ($urandom_range(0, 7) == 0);
      end
      grant = '0;
      if ($urandom_range(0, 3) == 0) begin
        c = $urandom_range(0, N - 1);
        if (pend[c]) grant[c] = 1'b1;
      end
      #1;
      // reference for the coming edge
      for (int i = 0; i < N; i++) begin
        rise = lo[i] && !lo_prev[i];
        fall = !lo[i] && lo_prev[i];
        free = !r_pend[i] || grant[i];
        if (fall && r_active[i] && acquire) begin
          if (r_enabled[i] || en[i]) begin
            if (free) begin
              r_pend[i] = 1; r_plead[i] = r_lead[i]; r_ptrail[i] = int'(ts); n_records++;
            end else begin
              r_lost++;
            end
          end else begin
            n_suppressed++;
          end
          if (grant[i] && !(r_enabled[i] || en[i])) r_pend[i] = 0;
        end else if (grant[i]) begin
          r_pend[i] = 0;
        end
        if (!acquire) begin r_active[i] = 0; r_enabled[i] = 0; end
        else if (rise) begin r_active[i] = 1; r_enabled[i] = en[i]; r_lead[i] = int'(ts); end
        else if (fall) begin r_active[i] = 0; r_enabled[i] = 0; end
        else if (r_active[i] && lo[i]) r_enabled[i] = r_enabled[i] | en[i];
      end
    end
    chk(n_records > 100, "records made");
    chk(n_suppressed > 100, "pulses suppressed");
    chk(r_lost > 0, "lost record exercised");
    $display("records=%0d suppressed=%0d lost=%0d", n_records, n_suppressed, r_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
