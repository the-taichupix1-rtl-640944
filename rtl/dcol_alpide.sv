// dcol_alpide - one ALPIDE-like double column: 128 edge-triggered pixel
// flip-flops read out through an AERD tree.
//
// Pixels are coded in a serpentine: the top row holds 0 (left) and 1
// (right), the next row 3 (left) and 2 (right), down to the bottom row with
// 127 (left) and 126 (right). The address equals the position in the readout
// queue, so pixels are read in order 0, 1, ..., 127 (the top pixel first).
//
// The interface to the end of column is the same as the FE-I3-like double
// column's: fastor (any hit pending), read, address. The AERD's reset output
// clears the pixel being read at the clock edge that ends the READ cycle.
`timescale 1ns / 1ps

module dcol_alpide #(
  parameter int unsigned N_PIX = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_PIX-1:0] outd,
  input  logic             dpulse,
  input  logic             cfg_we,
  input  logic [6:0]       cfg_addr,
  input  logic             cfg_mask,
  input  logic             cfg_pulse_en,
  input  logic             read,
  output logic             fastor,
  output logic [6:0]       address
);

  logic [N_PIX-1:0] state, clr;
  logic [$clog2(N_PIX)-1:0] enc_addr;

  for (genvar a = 0; a < N_PIX; a++) begin : g_pix
    pixel_alpide u_pix (
      .clk, .rst_n,
      .outd         (outd[a]),
      .dpulse,
      .cfg_we       (cfg_we && cfg_addr == 7'(a)),
      .cfg_mask, .cfg_pulse_en,
      .clr          (clr[a]),
      .state        (state[a])
    );
  end

  aerd #(.N(N_PIX)) u_aerd (
    .state, .read,
    .valid (fastor),
    .addr  (enc_addr),
    .clr
  );

  assign address = 7'(enc_addr);

endmodule
