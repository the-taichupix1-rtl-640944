// pixel_alpide - ALPIDE-like in-pixel readout logic (matrix scheme 2).
//
// The hit is stored by an edge-triggered flip-flop with reset (STATE): it is
// set once per rising edge of the pixel's trigger signal, which is the
// discriminator output OUTD, or the digital test pulse DPULSE when this pixel's
// pulse enable is set, and is blocked by the mask. Because only an edge sets
// it, a hit that has been read is not stored again while OUTD is still high,
// unlike the FE-I3-like scheme. STATE is cleared by clr, the reset line that
// the double column's AERD (address encoder and reset decoder) drives for the
// pixel being read.
//
// Timing: the edge is detected synchronously at 40 MHz by comparing the
// trigger signal with its value one clock earlier (a design choice; the chip
// uses a dynamic flip-flop). A set and a clr in the same cycle leave STATE
// set, so a new hit arriving while the old one is read is kept.
`timescale 1ns / 1ps

module pixel_alpide (
  input  logic clk,
  input  logic rst_n,
  input  logic outd,
  input  logic dpulse,
  input  logic cfg_we,
  input  logic cfg_mask,
  input  logic cfg_pulse_en,
  input  logic clr,        // Reset from the AERD
  output logic state       // STATE
);

  logic mask, pulse_en, trig, trig_q;

  assign trig = ~mask & (outd | (dpulse & pulse_en));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= 1'b0;
      trig_q   <= 1'b0;
      mask     <= 1'b0;
      pulse_en <= 1'b0;
    end else begin
      if (cfg_we) begin
        mask     <= cfg_mask;
        pulse_en <= cfg_pulse_en;
      end
      trig_q <= trig;
      state  <= (state & ~clr) | (trig & ~trig_q);
    end
  end

endmodule
