// trigger_match - trigger & match stage between fifo_column and the readout
// controller, one per double column.
//
// Triggerless mode: every record at the head of fifo_column is offered to the
// readout controller and popped when granted.
//
// Trigger mode: a record with timestamp ts belongs to a trigger that arrived
// while the timer held ts + latency + d, for d = 0 .. window-1 (window is at
// most 7 ticks = 175 ns). The decision is taken once the record's age,
// timer - ts, has reached latency + window, i.e. once every trigger that could
// match it has been recorded in the trigger history. A matched record is
// offered to the readout controller; an unmatched one is dropped (popped
// without being offered). Latency is limited to 240 ticks (6 us) so that
// latency + window fits within one 256-tick timer period.
//
// Purely combinational; pop goes back to fifo_column in the same cycle. The
// placement of the window after the nominal latency and dropping unmatched
// data are choices of this design.
`timescale 1ns / 1ps

module trigger_match
  import taichupix_pkg::*;
(
  input  logic                  trig_mode,
  input  logic [TS_W-1:0]       latency,
  input  logic [2:0]            window,     // 0 is treated as 1
  input  logic [TS_W-1:0]       timer,
  input  logic [(1<<TS_W)-1:0]  hist,
  input  logic                  head_valid,
  input  logic [TS_W-1:0]       head_ts,
  output logic                  pop,
  output logic                  out_valid,
  input  logic                  grant
);

  logic [2:0]      win;
  logic [TS_W-1:0] age, lat;
  logic [TS_W:0]   thr;
  logic            decide, matched;

  assign win    = (window == 3'd0) ? 3'd1 : window;
  assign lat    = (latency > TS_W'(240)) ? TS_W'(240) : latency;
  assign age    = timer - head_ts;
  assign thr    = {1'b0, lat} + (TS_W+1)'(win);
  assign decide = ({1'b0, age} >= thr);

  always_comb begin
    matched = 1'b0;
    for (int d = 0; d < 7; d++) begin
      if (d < int'(win)) matched |= hist[TS_W'(head_ts + lat + TS_W'(d))];
    end
  end

  always_comb begin
    if (trig_mode) begin
      out_valid = head_valid && decide && matched;
      pop       = (out_valid && grant) || (head_valid && decide && !matched);
    end else begin
      out_valid = head_valid;
      pop       = head_valid && grant;
    end
  end

endmodule
