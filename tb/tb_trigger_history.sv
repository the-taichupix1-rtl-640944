// tb_trigger_history - drives random triggers for several timer periods and
// checks that bit t of the history equals the trigger level seen during the
// most recent cycle in which the timer held t.
`timescale 1ns / 1ps

module tb_trigger_history;
  logic clk = 0, rst_n = 1, trigger = 0;
  logic [7:0] timer = 0;
  logic [255:0] hist;
  logic [255:0] model = '0;
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  trigger_history dut (.*);
  always #12.5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      trigger = ($urandom_range(9) == 0);
      @(posedge clk);
      model[timer] = trigger;
      @(negedge clk);
      checks++;
      if (hist != model) begin failures++; $display("FAIL at timer %0d", timer); end
      timer = timer + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
