`timescale 1ns/1ps
// tb_train_controller: two pulse-train cycles with a short settling time.
// The first train comes after settling (normal), the second before it
// (early_train). Checks the state sequence, the exact settling count, the
// power-control line, ts_clear placement and that readout waits for drained.
module tb_train_controller;
  import lstfe_pkg::*;
  localparam int SETTLE = 20;
  logic clk = 0, rst_n = 0, power_req = 0, train_gate = 0, drained = 0;
  train_state_e state;
  logic fe_power_on, acquire, ts_clear, readout_en, early_train;
  int checks = 0, failures = 0;

  train_controller #(.SETTLE_CYCLES(SETTLE)) dut (.clk, .rst_n, .power_req, .train_gate, .drained,
    .state, .fe_power_on, .acquire, .ts_clear, .readout_en, .early_train);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t (state %0d)", what, $time, state); end
  endtask

  task automatic expect_outputs(input train_state_e s);
    chk(state == s, $sformatf("state %0d expected", s));
    chk(fe_power_on == (s == ST_SETTLE || s == ST_READY || s == ST_ACQUIRE), "fe_power_on");
    chk(acquire == (s == ST_ACQUIRE), "acquire");
    chk(readout_en == (s == ST_READOUT), "readout_en");
  endtask

  initial begin
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) begin @(negedge clk); expect_outputs(ST_OFF); end
    // ---- train 1: settled in time
    power_req = 1;
    @(negedge clk); power_req = 0;
    n = 0;
    while (state == ST_SETTLE && n < 1000) begin
      expect_outputs(ST_SETTLE); chk(!ts_clear, "no ts_clear while settling");
      @(negedge clk); n++;
    end
    chk(n == SETTLE, $sformatf("settled after %0d cycles, expected %0d", n, SETTLE));
    repeat (4) begin expect_outputs(ST_READY); @(negedge clk); end
    train_gate = 1;
    #1 chk(ts_clear, "ts_clear before ACQUIRE");
    @(negedge clk);
    chk(!ts_clear, "ts_clear one cycle");
    repeat (30) begin expect_outputs(ST_ACQUIRE); @(negedge clk); end
    train_gate = 0;
    @(negedge clk);
    repeat (10) begin expect_outputs(ST_READOUT); @(negedge clk); end
    chk(!early_train, "train 1 not early");
    drained = 1;
    @(negedge clk); drained = 0;
    expect_outputs(ST_OFF);
    // ---- train 2: arrives before settling ends
    repeat (5) @(negedge clk);
    power_req = 1;
    @(negedge clk); power_req = 0;
    repeat (SETTLE / 2) begin expect_outputs(ST_SETTLE); @(negedge clk); end
    train_gate = 1;
    @(negedge clk);
    expect_outputs(ST_ACQUIRE);
    chk(early_train, "early_train flagged");
    repeat (10) @(negedge clk);
    train_gate = 0; drained = 1;
    @(negedge clk);
    expect_outputs(ST_READOUT);
    @(negedge clk);
    expect_outputs(ST_OFF);
    drained = 0;
    // ---- train 3: train_gate alone powers up and, being early, is flagged
    train_gate = 1;
    @(negedge clk); expect_outputs(ST_SETTLE);
    @(negedge clk); expect_outputs(ST_ACQUIRE);
    chk(early_train, "train-gate-only start flagged early");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
