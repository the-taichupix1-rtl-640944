// dcol_fei3 - one FE-I3-like double column: 128 pixels (64 rows x 2 columns)
// sharing a single address bus towards the end of column.
//
// Pixels are coded in a serpentine: the top row holds addresses 127 (left)
// and 126 (right), the next row 124 (left) and 125 (right), and so on down to
// the bottom row with 0 (left) and 1 (right); i.e. address a sits in row a/2,
// on the left when a[0] equals the row's lowest bit. The priority chain starts
// at the top, so pixels are read in address order 127, 126, ..., 0.
//
// Interface (same for both matrix schemes):
//   outd[a]  discriminator output of the pixel with address a
//   fastor   high while any pixel of the double column holds a hit
//   read     READ: the pixel currently on 'address' is cleared at the clock edge
//   address  ADDRESS[6:0] of the highest-priority pixel holding a hit
// Pixel configuration: cfg_we with cfg_addr picks one pixel's mask and pulse
// enable. The serpentine numbering and the order of reading follow the chip;
// the ripple daisy chain is the chip's FE-I3 structure.
`timescale 1ns / 1ps

module dcol_fei3 #(
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

  // busy[p]: a pixel at chain position < p holds a hit. Position p carries
  // address N_PIX-1-p (position 0 = top left = highest priority).
  logic [N_PIX:0]   busy;
  logic [6:0]       bus [N_PIX];
  logic [N_PIX-1:0] hit;

  assign busy[0] = 1'b0;

  for (genvar p = 0; p < N_PIX; p++) begin : g_pix
    localparam logic [6:0] A = 7'(N_PIX - 1 - p);
    pixel_fei3 #(.ADDR(A)) u_pix (
      .clk, .rst_n,
      .outd         (outd[A]),
      .dpulse,
      .cfg_we       (cfg_we && cfg_addr == A),
      .cfg_mask, .cfg_pulse_en,
      .prev_busy    (busy[p]),
      .read,
      .next_busy    (busy[p+1]),
      .hit          (hit[p]),
      .addr_out     (bus[p])
    );
  end

  // wired-OR address bus
  always_comb begin
    address = '0;
    for (int p = 0; p < N_PIX; p++) address |= bus[p];
  end

  assign fastor = busy[N_PIX];

endmodule
