// tb_pixel_alpide - self-checking test of one ALPIDE-like pixel: STATE is set
// once per rising edge of OUTD, is not set again while OUTD stays high after a
// reset, is cleared by the AERD reset, and obeys mask and pulse enable.
`timescale 1ns / 1ps

module tb_pixel_alpide;
  logic clk = 0, rst_n = 1;
  logic outd = 0, dpulse = 0, cfg_we = 0, cfg_mask = 0, cfg_pulse_en = 0, clr = 0;
  logic state;
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  pixel_alpide dut (.*);

  always #12.5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    step(); rst_n = 1; step();
    chk(!state, "idle");
    outd = 1; step(); #1;
    chk(state, "rising edge stores hit");
    clr = 1; step(); clr = 0; #1;
    chk(!state, "reset clears");
    step(); step(); #1;
    chk(!state, "OUTD still high: not stored again");
    outd = 0; step(); outd = 1; step(); #1;
    chk(state, "new rising edge stores again");
    // set and clear in the same cycle: set wins
    outd = 0; clr = 1; step(); clr = 0; #1;
    chk(!state, "cleared");
    outd = 1; clr = 1; step(); clr = 0; #1;
    chk(state, "edge during reset is kept");
    clr = 1; step(); clr = 0; outd = 0; step();
    cfg_we = 1; cfg_mask = 1; step(); cfg_we = 0;
    outd = 1; step(); step(); outd = 0; #1;
    chk(!state, "masked");
    cfg_we = 1; cfg_mask = 0; cfg_pulse_en = 1; step(); cfg_we = 0;
    dpulse = 1; step(); dpulse = 0; #1;
    chk(state, "digital pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
