// eoc - end-of-column logic of one double column.
//
// When FASTOR rises, the current TIMER value is latched as the timestamp;
// every hit read while FASTOR stays high gets that same timestamp, so hits in
// different pixels that arrive close together share it, and the next rising
// edge of FASTOR opens a new timestamp. While FASTOR is high and fifo_column
// has room, READ is pulsed: one cycle high, one cycle low. During the READ
// cycle the double column presents the address of its highest-priority hit,
// and at the clock edge ending that cycle the pixel is cleared and
// {timestamp, address} is written into fifo_column.
//
// Timing: the timestamp is the TIMER value of the first cycle in which FASTOR
// is high. The first READ comes one cycle later, then one READ every two
// cycles (50 ns per hit at 40 MHz). The read-every-other-cycle rhythm, which
// leaves a full cycle for the priority chain to settle after a clear, and
// holding READ off while fifo_column is full, are choices of this design.
`timescale 1ns / 1ps

module eoc
  import taichupix_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   timer,
  input  logic              fastor,
  input  logic [PIX_AW-1:0] address,
  output logic              read,
  input  logic              fifo_full,
  output logic              wr_en,
  output col_hit_t          wr_data
);

  logic            fastor_q;
  logic [TS_W-1:0] ts_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fastor_q <= 1'b0;
      ts_q     <= '0;
      read     <= 1'b0;
    end else begin
      fastor_q <= fastor;
      if (fastor && !fastor_q) ts_q <= timer;
      read <= fastor && !read && !fifo_full;
    end
  end

  assign wr_en        = read;
  assign wr_data.ts   = ts_q;
  assign wr_data.addr = address;

endmodule
