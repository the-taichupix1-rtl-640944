// taichupix1_top - digital readout of the TaichuPix1 pixel sensor.
//
// Data path, per double column d (0..95):
//   pixels (dcol_fei3 for d < N_DCOL_FEI3, dcol_alpide above)
//     -> eoc (timestamp on FASTOR, READ / ADDRESS)
//     -> fifo_column (sync_fifo, {timestamp, address})
//     -> trigger_match (trigger or triggerless selection)
// then for the whole chip:
//   readout_controller (3 groups of 32 double columns) -> fifo_chip (32-bit
//   words) -> serializer (32:1 multiplexer, bit clock from the PLL), or the SPI
//   debug read of fifo_chip when debug mode is set (the serializer is then off).
// A shared timestamp_counter dates hits and a trigger_history records the
// external trigger for the trigger & match stages. spi_config holds the
// configuration.
//
// The analog parts are outside this module: outd[d][a] is the discriminator
// output of pixel address a in double column d, apulse goes to the analog
// charge injection, idac / vdac are the DAC codes, clk_ser is the PLL's bit
// clock and dout is the bit for the CML driver. clk is the 40 MHz system
// clock, rst_n an asynchronous active-low reset, trigger the external trigger
// already synchronous to clk.
//
// The split of the matrix into two schemes, the per-double-column FIFO and
// trigger stage, the group readout and the 32-bit word follow the chip; FIFO
// depths, the trigger window placement, the SPI register map and the clocking
// of the serializer are choices of this design.
`timescale 1ns / 1ps

module taichupix1_top
  import taichupix_pkg::*;
#(
  parameter int unsigned N_DC            = N_DCOL,
  parameter int unsigned N_DC_FEI3       = N_DCOL_FEI3,
  parameter int unsigned N_GRP           = N_GROUP,
  parameter int unsigned COL_FIFO_DEPTH  = 16,
  parameter int unsigned CHIP_FIFO_DEPTH = 64
) (
  input  logic               clk,
  input  logic               clk_ser,
  input  logic               rst_n,
  input  logic [N_PIX-1:0]   outd [N_DC],
  input  logic               trigger,
  input  logic               csb,
  input  logic               sclk,
  input  logic               mosi,
  output logic               miso,
  output logic               dout,
  output logic               apulse,
  output logic [7:0]         idac,
  output logic [9:0]         vdac,
  output logic [TS_W-1:0]    timer
);

  localparam int unsigned PER_GRP = N_DC / N_GRP;
  localparam int unsigned CNT_W   = $clog2(CHIP_FIFO_DEPTH) + 1;

  // configuration
  logic             trig_mode, debug_mode, ser_en, prbs_en;
  logic [2:0]       group_en, trig_window;
  logic [TS_W-1:0]  trig_latency;
  logic             pix_we, pix_mask, pix_pulse_en, dpulse;
  logic [6:0]       pix_dcol, pix_addr;

  // trigger
  logic [(1<<TS_W)-1:0] hist;

  // per double column
  logic [N_DC-1:0]  fastor, read, cf_wr, cf_rd, cf_empty, cf_full, req, grant;
  logic [6:0]       address [N_DC];
  col_hit_t         cf_wdata [N_DC];
  col_hit_t         cf_rdata [N_DC];

  // chip level
  out_word_t        chip_wdata;
  logic [31:0]      chip_rdata;
  logic             chip_wr, chip_rd, chip_empty, chip_full, ser_pop, spi_pop;
  logic [CNT_W-1:0] chip_count;

  timestamp_counter #(.W(TS_W)) u_timer (.clk, .rst_n, .timer);

  trigger_history u_trig_hist (.clk, .rst_n, .trigger, .timer, .hist);

  for (genvar d = 0; d < N_DC; d++) begin : g_dcol
    if (d < N_DC_FEI3) begin : g_fei3
      dcol_fei3 #(.N_PIX(N_PIX)) u_dcol (
        .clk, .rst_n, .outd(outd[d]), .dpulse,
        .cfg_we(pix_we && pix_dcol == 7'(d)), .cfg_addr(pix_addr),
        .cfg_mask(pix_mask), .cfg_pulse_en(pix_pulse_en),
        .read(read[d]), .fastor(fastor[d]), .address(address[d])
      );
    end else begin : g_alpide
      dcol_alpide #(.N_PIX(N_PIX)) u_dcol (
        .clk, .rst_n, .outd(outd[d]), .dpulse,
        .cfg_we(pix_we && pix_dcol == 7'(d)), .cfg_addr(pix_addr),
        .cfg_mask(pix_mask), .cfg_pulse_en(pix_pulse_en),
        .read(read[d]), .fastor(fastor[d]), .address(address[d])
      );
    end

    eoc u_eoc (
      .clk, .rst_n, .timer, .fastor(fastor[d]), .address(address[d]),
      .read(read[d]), .fifo_full(cf_full[d]), .wr_en(cf_wr[d]), .wr_data(cf_wdata[d])
    );

    sync_fifo #(.WIDTH(COL_HIT_W), .DEPTH(COL_FIFO_DEPTH)) u_fifo_column (
      .clk, .rst_n, .wr_en(cf_wr[d]), .wr_data(cf_wdata[d]),
      .rd_en(cf_rd[d]), .rd_data(cf_rdata[d]), .empty(cf_empty[d]), .full(cf_full[d]),
      .count()
    );

    trigger_match u_trig_match (
      .trig_mode, .latency(trig_latency), .window(trig_window), .timer, .hist,
      .head_valid(!cf_empty[d]), .head_ts(cf_rdata[d].ts),
      .pop(cf_rd[d]), .out_valid(req[d]), .grant(grant[d])
    );
  end

  readout_controller #(.N_GRP(N_GRP), .PER_GRP(PER_GRP)) u_ctrl (
    .clk, .rst_n, .group_en(group_en[N_GRP-1:0]), .req, .data(cf_rdata), .grant,
    .fifo_full(chip_full), .wr_en(chip_wr), .wr_data(chip_wdata)
  );

  assign chip_rd = debug_mode ? spi_pop : ser_pop;

  sync_fifo #(.WIDTH(32), .DEPTH(CHIP_FIFO_DEPTH)) u_fifo_chip (
    .clk, .rst_n, .wr_en(chip_wr), .wr_data(chip_wdata),
    .rd_en(chip_rd), .rd_data(chip_rdata), .empty(chip_empty), .full(chip_full),
    .count(chip_count)
  );

  serializer #(.W(32)) u_ser (
    .clk, .clk_ser, .rst_n, .en(ser_en && !debug_mode), .prbs_en,
    .fifo_empty(chip_empty), .fifo_data(chip_rdata), .fifo_pop(ser_pop), .dout
  );

  spi_config #(.CNT_W(CNT_W)) u_spi (
    .clk, .rst_n, .csb, .sclk, .mosi, .miso,
    .trig_mode, .debug_mode, .group_en, .ser_en, .prbs_en,
    .trig_latency, .trig_window, .idac, .vdac,
    .pix_we, .pix_dcol, .pix_addr, .pix_mask, .pix_pulse_en, .dpulse, .apulse,
    .fifo_empty(chip_empty), .fifo_data(chip_rdata), .fifo_count(chip_count),
    .fifo_pop(spi_pop)
  );

  initial assert (N_DC == N_GRP * PER_GRP && N_GRP <= 3)
    else $error("taichupix1_top: double columns must split evenly into at most 3 groups");

endmodule
