// timestamp_counter - free-running timer that dates hits at the end of column.
//
// A W-bit counter advanced by every rising edge of the 40 MHz clock, so one
// step is 25 ns and an 8-bit counter wraps every 6.4 us. All end-of-column
// blocks and the trigger logic read the same TIMER value. Reset value 0 is a
// choice of this design.
`timescale 1ns / 1ps

module timestamp_counter #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] timer
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) timer <= '0;
    else        timer <= timer + 1'b1;
  end

endmodule
