// prbs7 - PRBS-2^7 generator used as the serializer's self-test data source.
//
// A 7-bit Fibonacci LFSR with feedback polynomial x^7 + x^6 + 1, advanced
// once per bit clock while en is high; the output is the register's most
// significant bit, so the sequence repeats every 127 bits. The polynomial and
// the all-ones seed are choices of this design (the common PRBS7 definition).
`timescale 1ns / 1ps

module prbs7 (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic bit_out
);

  logic [6:0] lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  lfsr <= 7'h7F;
    else if (en) lfsr <= {lfsr[5:0], lfsr[6] ^ lfsr[5]};
  end

  assign bit_out = lfsr[6];

endmodule
