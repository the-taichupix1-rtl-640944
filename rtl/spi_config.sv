// spi_config - SPI slave with the chip's configuration registers and the
// debug-mode read port of fifo_chip.
//
// Frame (SPI mode 0, most significant bit first, CSB low for the whole frame):
//   8-bit command {write, addr[6:0]} followed by 32 data bits.
// For a write, MOSI carries the data and the register is updated after the
// 40th bit. For a read, MISO carries the register's value in the 32 bits that
// follow the command. Reading REG_FIFO pops one word from fifo_chip (an empty
// FIFO reads as 0, data-available bit low), so in debug mode the whole output
// stream can be read without the serializer.
//
// SCLK, CSB and MOSI are sampled with the 40 MHz clock through two-flop
// synchronizers; SCLK edges are found from the samples. This works for SPI
// clocks up to about 10 MHz. MISO changes shortly after a detected rising SCLK
// edge, so the master, which samples on the rising edge, sees each bit a full
// SCLK period after it was set.
//
// Registers (taichupix_pkg::reg_addr_e) and their reset values:
//   CTRL   trigger mode 0, debug mode 0, group enable 3'b111, serializer on,
//          PRBS off
//   TRGLAT 120 (3 us)   TRGWIN 7 (175 ns)   IDAC 128   VDAC 512
//   PIXCFG write-only: one pixel's mask and pulse enable (one-cycle cfg_we)
//   PULSE  write-only: one-cycle DPULSE and/or APULSE strobes
//   FIFO   read: next fifo_chip word      STATUS read: fifo_chip fill level
// The frame format, the register map and the reset values are choices of this
// design; the chip's SPI lines and the debug-mode FIFO read are the chip's.
`timescale 1ns / 1ps

module spi_config
  import taichupix_pkg::*;
#(
  parameter int unsigned CNT_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  // SPI
  input  logic             csb,
  input  logic             sclk,
  input  logic             mosi,
  output logic             miso,
  // configuration
  output logic             trig_mode,
  output logic             debug_mode,
  output logic [2:0]       group_en,
  output logic             ser_en,
  output logic             prbs_en,
  output logic [TS_W-1:0]  trig_latency,
  output logic [2:0]       trig_window,
  output logic [7:0]       idac,
  output logic [9:0]       vdac,
  output logic             pix_we,
  output logic [6:0]       pix_dcol,
  output logic [6:0]       pix_addr,
  output logic             pix_mask,
  output logic             pix_pulse_en,
  output logic             dpulse,
  output logic             apulse,
  // fifo_chip debug read
  input  logic             fifo_empty,
  input  logic [31:0]      fifo_data,
  input  logic [CNT_W-1:0] fifo_count,
  output logic             fifo_pop
);

  logic [2:0]  sclk_s;
  logic [1:0]  csb_s, mosi_s;
  logic        sclk_rise, cs_active;
  logic [5:0]  bitcnt;
  logic [7:0]  cmd;
  logic [31:0] rx, tx;
  logic [31:0] rd_value;
  logic [6:0]  cmd_addr;
  logic [31:0] wdata;

  assign sclk_rise = sclk_s[1] && !sclk_s[2];
  assign cs_active = !csb_s[1];
  assign cmd_addr  = {cmd[5:0], mosi_s[1]};   // address once the 8th bit is in
  assign wdata     = {rx[30:0], mosi_s[1]};   // data once the 40th bit is in

  always_comb begin
    rd_value = '0;
    case (cmd_addr)
      REG_CTRL:   rd_value = 32'({prbs_en, ser_en, group_en, debug_mode, trig_mode});
      REG_TRGLAT: rd_value = 32'(trig_latency);
      REG_TRGWIN: rd_value = 32'(trig_window);
      REG_IDAC:   rd_value = 32'(idac);
      REG_VDAC:   rd_value = 32'(vdac);
      REG_FIFO:   rd_value = fifo_empty ? 32'd0 : fifo_data;
      REG_STATUS: rd_value = 32'(fifo_count);
      default:    rd_value = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s       <= '0;
      csb_s        <= 2'b11;
      mosi_s       <= '0;
      bitcnt       <= '0;
      cmd          <= '0;
      rx           <= '0;
      tx           <= '0;
      trig_mode    <= 1'b0;
      debug_mode   <= 1'b0;
      group_en     <= 3'b111;
      ser_en       <= 1'b1;
      prbs_en      <= 1'b0;
      trig_latency <= TS_W'(120);
      trig_window  <= 3'd7;
      idac         <= 8'd128;
      vdac         <= 10'd512;
      pix_we       <= 1'b0;
      pix_dcol     <= '0;
      pix_addr     <= '0;
      pix_mask     <= 1'b0;
      pix_pulse_en <= 1'b0;
      dpulse       <= 1'b0;
      apulse       <= 1'b0;
      fifo_pop     <= 1'b0;
    end else begin
      sclk_s   <= {sclk_s[1:0], sclk};
      csb_s    <= {csb_s[0], csb};
      mosi_s   <= {mosi_s[0], mosi};
      pix_we   <= 1'b0;
      dpulse   <= 1'b0;
      apulse   <= 1'b0;
      fifo_pop <= 1'b0;

      if (!cs_active) begin
        bitcnt <= '0;
      end else if (sclk_rise) begin
        bitcnt <= (bitcnt == 6'd39) ? 6'd0 : bitcnt + 1'b1;
        if (bitcnt < 6'd8) begin
          cmd <= {cmd[6:0], mosi_s[1]};
          if (bitcnt == 6'd7 && !cmd[6]) begin     // read command complete
            tx       <= rd_value;
            fifo_pop <= (cmd_addr == REG_FIFO) && !fifo_empty;
          end
        end else begin
          rx <= {rx[30:0], mosi_s[1]};
          tx <= {tx[30:0], 1'b0};
          if (bitcnt == 6'd39 && cmd[7]) begin    // write frame complete
            case (cmd[6:0])
              REG_CTRL: begin
                trig_mode  <= wdata[0];
                debug_mode <= wdata[1];
                group_en   <= wdata[4:2];
                ser_en     <= wdata[5];
                prbs_en    <= wdata[6];
              end
              REG_TRGLAT: trig_latency <= wdata[7:0];
              REG_TRGWIN: trig_window  <= wdata[2:0];
              REG_IDAC:   idac         <= wdata[7:0];
              REG_VDAC:   vdac         <= wdata[9:0];
              REG_PIXCFG: begin
                pix_we       <= 1'b1;
                pix_dcol     <= wdata[6:0];
                pix_addr     <= wdata[13:7];
                pix_mask     <= wdata[14];
                pix_pulse_en <= wdata[15];
              end
              REG_PULSE: begin
                dpulse <= wdata[0];
                apulse <= wdata[1];
              end
              default: ;
            endcase
          end
        end
      end
    end
  end

  assign miso = tx[31];

endmodule
