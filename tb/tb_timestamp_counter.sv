// tb_timestamp_counter - checks that the timer starts at 0, advances by one
// per clock (25 ns at 40 MHz) and wraps after 256 steps.
`timescale 1ns / 1ps

module tb_timestamp_counter;
  logic clk = 0, rst_n = 1;
  logic [7:0] timer;
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  timestamp_counter #(.W(8)) dut (.*);
  always #12.5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    realtime t0;
    @(posedge clk); #1;
    checks++; if (timer != 0) failures++;
    rst_n = 1;
    for (int i = 1; i <= 600; i++) begin
      @(posedge clk); #1;
      checks++;
      if (timer != 8'(i)) begin failures++; $display("FAIL step %0d timer %0d", i, timer); end
      if (i == 1) t0 = $realtime;
      if (i == 257) begin
        checks++;
        if ($realtime - t0 != 256 * 25.0) begin failures++; $display("FAIL wrap period"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
