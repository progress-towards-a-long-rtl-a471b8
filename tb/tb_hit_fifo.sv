`timescale 1ns/1ps
// tb_hit_fifo: random writes and reads against a queue; phases that fill
// the FIFO past full check that refused writes are dropped and counted.
module tb_hit_fifo;
  localparam int W = 27, DEPTH = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data, rd_data;
  logic empty, full;
  logic [4:0] count;
  logic [15:0] drop_count;
  logic [W-1:0] q [$];
  int drops = 0, checks = 0, failures = 0, fulls = 0;

  hit_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en, .rd_data,
                                        .empty, .full, .count, .drop_count);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int pw, pr;
    bit was_full;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // state checks for the current cycle
      chk(int'(count) == q.size(), "count");
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == DEPTH), "full");
      chk(int'(drop_count) == drops, "drop_count");
      if (q.size() > 0) chk(rd_data == q[0], "rd_data");
      if (full) fulls++;
      // phases: write-heavy, read-heavy, balanced
      pw = ((cyc / 250) % 3 == 0) ? 90 : ((cyc / 250) % 3 == 1) ? 20 : 50;
      pr = ((cyc / 250) % 3 == 0) ? 20 : ((cyc / 250) % 3 == 1) ? 90 : 50;
      wr_en   = ($urandom_range(0, 99) < pw);
      wr_data = W'($urandom);
      rd_en   = ($urandom_range(0, 99) < pr) && (q.size() > 0);
      // reference update for the coming edge (full decided before the read)
      was_full = (q.size() == DEPTH);
      if (wr_en && was_full) drops++;
      if (rd_en) void'(q.pop_front());
      if (wr_en && !was_full) q.push_back(wr_data);
    end
    chk(fulls > 0 && drops > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
