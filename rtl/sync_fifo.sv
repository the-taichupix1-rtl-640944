// sync_fifo - single-clock first-word-fall-through FIFO.
//
// Used for the two FIFO levels of the readout: fifo_column (one per double
// column, holding {timestamp, address} while the trigger decision is pending)
// and fifo_chip (32-bit output words waiting for the serializer or for the
// SPI debug read). rd_data always shows the oldest word while empty is low;
// rd_en removes it. A write when full and a read when empty are ignored.
// DEPTH must be a power of two. Both depths are choices of this design.
`timescale 1ns / 1ps

module sync_fifo #(
  parameter int unsigned WIDTH = 15,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign count   = wptr - rptr;
  assign empty   = (wptr == rptr);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (1 << AW) == DEPTH)
    else $error("sync_fifo: DEPTH must be a power of two");

endmodule
