// serializer - digital part of the chip's serial output: word fetch and the
// 32:1 multiplexer.
//
// Two clock domains. In the 40 MHz domain (clk) a holding register is
// refilled from fifo_chip whenever the bit-clock side asks for a new word; an
// empty FIFO gives the idle word 0 (data-available bit low). In the bit-clock
// domain (clk_ser, from the on-chip PLL: 160 MHz for 160 Mbps) a 5-bit
// counter selects, through a 32:1 multiplexer, one bit of the current word
// per bit clock, most significant bit first. At the last bit the next word is
// taken from the holding register if the 40 MHz side has refilled it,
// otherwise the idle word is sent. The request/acknowledge pair is made of
// toggles passed through two-flop synchronizers, so the clocks need not be
// related. Refilling takes about four 40 MHz cycles, so words are sent back to
// back up to a bit clock of about 8 x 40 MHz; faster bit clocks insert idle
// words.
//
// prbs_en replaces the data by a PRBS-2^7 sequence (self-test). en = 0 stops
// the serializer (dout low, no FIFO reads), as in the chip's debug mode.
// The bit order, the idle word and the clock-crossing scheme are choices of
// this design; the analog PLL and the CML driver are not part of this module.
`timescale 1ns / 1ps

module serializer #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         clk_ser,
  input  logic         rst_n,
  input  logic         en,
  input  logic         prbs_en,
  input  logic         fifo_empty,
  input  logic [W-1:0] fifo_data,
  output logic         fifo_pop,
  output logic         dout
);

  localparam int unsigned SW = $clog2(W);

  // ---------------- 40 MHz side ----------------
  logic [W-1:0] hold;
  logic         ack, req_s1, req_s2, req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold   <= '0;
      ack    <= 1'b0;
      req_s1 <= 1'b0;
      req_s2 <= 1'b0;
    end else begin
      req_s1 <= req;
      req_s2 <= req_s1;
      if (req_s2 != ack) begin
        hold <= fifo_empty ? '0 : fifo_data;
        ack  <= ~ack;
      end
    end
  end

  assign fifo_pop = (req_s2 != ack) && !fifo_empty;

  // ---------------- bit-clock side ----------------
  logic [W-1:0]  word;
  logic [SW-1:0] sel;
  logic          ack_s1, ack_s2, prbs_bit;

  prbs7 u_prbs (.clk(clk_ser), .rst_n, .en(en && prbs_en), .bit_out(prbs_bit));

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      word   <= '0;
      sel    <= '0;
      req    <= 1'b0;
      ack_s1 <= 1'b0;
      ack_s2 <= 1'b0;
      dout   <= 1'b0;
    end else begin
      ack_s1 <= ack;
      ack_s2 <= ack_s1;
      if (!en) begin
        dout <= 1'b0;
        sel  <= '0;
      end else if (prbs_en) begin
        dout <= prbs_bit;
      end else begin
        dout <= word[SW'(W - 1) - sel];          // 32:1 multiplexer
        sel  <= sel + 1'b1;
        if (sel == SW'(W - 1)) begin
          if (ack_s2 == req) begin
            word <= hold;
            req  <= ~req;
          end else begin
            word <= '0;
          end
        end
      end
    end
  end

  initial assert (W == (1 << SW)) else $error("serializer: W must be a power of two");

endmodule
