// tb_prbs7 - checks the PRBS-2^7 sequence: it obeys the recurrence of
// x^7 + x^6 + 1 (b[n] = b[n-6] xor b[n-7]), repeats every 127 bits and no
// sooner, holds 64 ones per period, and stops advancing when en is low.
`timescale 1ns / 1ps

module tb_prbs7;
  logic clk = 0, rst_n = 1, en = 0, bit_out;
  bit b [400];
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  prbs7 dut (.*);
  always #3 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ones = 0;
    @(negedge clk); rst_n = 1; en = 1;
    for (int n = 0; n < 400; n++) begin
      b[n] = bit_out;
      @(negedge clk);
    end
    for (int n = 7; n < 400; n++) begin
      checks++;
      if (b[n] != (b[n-6] ^ b[n-7])) begin failures++; $display("FAIL recurrence at %0d", n); end
    end
    for (int n = 0; n < 127; n++) ones += b[n];
    checks++; if (ones != 64) begin failures++; $display("FAIL ones %0d", ones); end
    for (int p = 1; p <= 127; p++) begin
      bit same;
      same = 1;
      for (int n = 0; n < 127; n++) if (b[n] != b[n+p]) same = 0;
      checks++;
      if (same != (p == 127)) begin failures++; $display("FAIL period %0d", p); end
    end
    en = 0;
    begin
      bit h;
      int chg;
      h = bit_out;
      chg = 0;
      repeat (20) begin @(negedge clk); if (bit_out != h) chg++; end
      checks++; if (chg != 0) begin failures++; $display("FAIL advanced while disabled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
