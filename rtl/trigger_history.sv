// trigger_history - trigger discriminating record shared by all columns.
//
// One bit per value of the 8-bit timer: bit t is written every time the timer
// holds t, with 1 if the external trigger is high in that cycle. Each bit
// therefore tells whether a trigger arrived at timer value t during the last
// 256 cycles (6.4 us at 40 MHz), which covers the longest trigger latency of
// 6 us plus the matching window. The trigger_match block of every double
// column looks up the bits belonging to the timestamp at the head of its
// fifo_column. The trigger input must be synchronous to clk. This structure
// is a choice of this design; the chip only names the function.
`timescale 1ns / 1ps

module trigger_history
  import taichupix_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  trigger,
  input  logic [TS_W-1:0]       timer,
  output logic [(1<<TS_W)-1:0]  hist
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hist <= '0;
    else        hist[timer] <= trigger;
  end

endmodule
