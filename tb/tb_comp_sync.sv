`timescale 1ns/1ps
// tb_comp_sync: random comparator levels are driven between clock edges;
// a reference two-cycle delay line predicts hi/lo and the edge pulses of lo.
module tb_comp_sync;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hi_in, lo_in, hi, lo, lo_rise, lo_fall;
  logic [N-1:0] hist_hi [4], hist_lo [4];
  int checks = 0, failures = 0;

  comp_sync #(.N_CHAN(N)) dut (.clk, .rst_n, .comp_hi_in(hi_in), .comp_lo_in(lo_in),
                               .hi, .lo, .lo_rise, .lo_fall);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [N-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %b exp %b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    hi_in = '0; lo_in = '0;
    for (int k = 0; k < 4; k++) begin hist_hi[k] = '0; hist_lo[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // hist[0] = value driven during the previous cycle, hist[k] k cycles earlier
      chk(hi, hist_hi[1], "hi");
      chk(lo, hist_lo[1], "lo");
      chk(lo_rise, hist_lo[1] & ~hist_lo[2], "lo_rise");
      chk(lo_fall, ~hist_lo[1] & hist_lo[2], "lo_fall");
      for (int k = 3; k > 0; k--) begin hist_hi[k] = hist_hi[k-1]; hist_lo[k] = hist_lo[k-1]; end
      // slowly changing levels, as comparator pulses are
      for (int c = 0; c < N; c++) begin
        if ($urandom_range(0, 3) == 0) hi_in[c] = ~hi_in[c];
        if ($urandom_range(0, 3) == 0) lo_in[c] = ~lo_in[c];
      end
      hist_hi[0] = hi_in; hist_lo[0] = lo_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
