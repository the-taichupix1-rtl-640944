// pixel_fei3 - FE-I3-like in-pixel readout logic (matrix scheme 1).
//
// Three parts, as in the chip's pixel diagram:
//  * pixel state register: set while the discriminator output OUTD (or the
//    digital test pulse DPULSE, when this pixel's pulse enable is set) is high,
//    unless the pixel is masked. It is level-set: if OUTD is still high when
//    the hit has been read, the hit is stored again.
//  * pixel priority: a daisy chain. prev_busy says a pixel higher in the
//    chain holds a hit; next_busy = prev_busy | state goes on down the chain.
//    The pixel is selected when it holds a hit and prev_busy is low.
//  * address generator: the selected pixel drives its hard-wired address ADDR
//    onto the double-column bus. On chip this is a pull-up/pull-down network;
//    here each pixel outputs ADDR when selected and zero otherwise, and the
//    double column ORs all pixel outputs.
// A READ while the pixel is selected clears the state at the next clock edge.
//
// Timing: everything is sampled on the rising edge of the 40 MHz clock (the
// chip's in-pixel logic is asynchronous; the synchronous model is this
// design's choice). The mask and pulse-enable flip-flops are written through
// cfg_we, a configuration path that is also this design's choice.
`timescale 1ns / 1ps

module pixel_fei3 #(
  parameter logic [6:0] ADDR = 7'd0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       outd,          // discriminator output
  input  logic       dpulse,        // global digital pulse strobe
  input  logic       cfg_we,        // write mask / pulse enable of this pixel
  input  logic       cfg_mask,
  input  logic       cfg_pulse_en,
  input  logic       prev_busy,     // "Previous Pixel"
  input  logic       read,          // READ from the end of column
  output logic       next_busy,     // "Next Pixel"
  output logic       hit,           // state register
  output logic [6:0] addr_out       // ADDR when selected, else 0
);

  logic mask, pulse_en, sel, set;

  assign set       = ~mask & (outd | (dpulse & pulse_en));
  assign sel       = hit & ~prev_busy;
  assign next_busy = prev_busy | hit;
  assign addr_out  = sel ? ADDR : 7'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit      <= 1'b0;
      mask     <= 1'b0;
      pulse_en <= 1'b0;
    end else begin
      if (cfg_we) begin
        mask     <= cfg_mask;
        pulse_en <= cfg_pulse_en;
      end
      hit <= (hit & ~(read & sel)) | set;
    end
  end

endmodule
