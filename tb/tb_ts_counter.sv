`timescale 1ns/1ps
// tb_ts_counter: random clear/run sequence against a reference count; a
// small 4-bit instance is taken past its top value to check the wrap flag.
module tb_ts_counter;
  localparam int TS_W = 4;
  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  logic [TS_W-1:0] ts;
  logic wrapped;
  int ref_ts = 0;
  bit ref_wrap = 0;
  int checks = 0, failures = 0, wraps_seen = 0;

  ts_counter #(.TS_W(TS_W)) dut (.clk, .rst_n, .clear, .run, .ts, .wrapped);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      checks++;
      if (int'(ts) != ref_ts || wrapped != ref_wrap) begin
        failures++;
        $display("FAIL ts=%0d exp %0d wrapped=%0b exp %0b", ts, ref_ts, wrapped, ref_wrap);
      end
      if (wrapped) wraps_seen++;
      clear = ($urandom_range(0, 59) == 0);
      run   = ($urandom_range(0, 9) != 0);
      // reference for the coming edge
      if (clear) begin ref_ts = 0; ref_wrap = 0; end
      else if (run) begin
        if (ref_ts == (1 << TS_W) - 1) begin ref_ts = 0; ref_wrap = 1; end
        else ref_ts++;
      end
    end
    checks++;
    if (wraps_seen == 0) begin failures++; $display("FAIL wrap never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
