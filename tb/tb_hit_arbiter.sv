`timescale 1ns/1ps
// tb_hit_arbiter: random pending sets; the grant must be the first pending
// channel after the one granted last (round robin). With all channels
// pending, every channel must be served once in each N_CHAN cycles.
module tb_hit_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] pend, grant;
  logic [2:0] gnt_idx;
  logic gnt_valid;
  int last = N - 1;
  int checks = 0, failures = 0;
  int served [N];

  hit_arbiter #(.N_CHAN(N)) dut (.clk, .rst_n, .pend, .grant, .gnt_idx, .gnt_valid);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_idx;
    pend = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      pend = (cyc < 2000) ? N'($urandom) & N'($urandom) : '1;
      if (cyc == 2000) foreach (served[c]) served[c] = 0;
      #1;
      exp_idx = -1;
      for (int k = 1; k <= N; k++)
        if (exp_idx < 0 && pend[(last + k) % N]) exp_idx = (last + k) % N;
      checks++;
      if (exp_idx < 0) begin
        if (gnt_valid || grant != '0) begin failures++; $display("FAIL grant with nothing pending"); end
      end else begin
        if (!gnt_valid || int'(gnt_idx) != exp_idx || grant != (N'(1) << exp_idx)) begin
          failures++;
          $display("FAIL pend=%b last=%0d got idx %0d grant %b exp %0d", pend, last, gnt_idx, grant, exp_idx);
        end
        last = exp_idx;
        if (cyc >= 2000) served[exp_idx]++;
      end
    end
    foreach (served[c]) begin
      checks++;
      if (served[c] != 125) begin failures++; $display("FAIL channel %0d served %0d of 1000", c, served[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
