`timescale 1ns/1ps
// tb_neighbor_enable: every pattern of 8 high-threshold bits, for radius 1
// and radius 2, against an enable computed from distances between strips.
module tb_neighbor_enable;
  localparam int N = 8;
  logic [N-1:0] hi, en1, en2;
  int checks = 0, failures = 0;

  neighbor_enable #(.N_CHAN(N), .RADIUS(1)) dut1 (.hi, .en(en1));
  neighbor_enable #(.N_CHAN(N), .RADIUS(2)) dut2 (.hi, .en(en2));

  function automatic logic [N-1:0] ref_en(input logic [N-1:0] h, input int r);
    logic [N-1:0] e = '0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (h[j] && (i - j <= r) && (j - i <= r)) e[i] = 1'b1;
    return e;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < (1 << N); p++) begin
      hi = N'(p);
      #1;
      checks += 2;
      if (en1 !== ref_en(hi, 1)) begin failures++; $display("FAIL r1 hi=%b en=%b", hi, en1); end
      if (en2 !== ref_en(hi, 2)) begin failures++; $display("FAIL r2 hi=%b en=%b", hi, en2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
