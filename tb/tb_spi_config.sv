// tb_spi_config - drives 10 MHz SPI frames (mode 0, 8-bit command then 32
// data bits) against the configuration block with a 40 MHz system clock.
// Checks: register writes reach the outputs and read back, reset values,
// one-cycle PIXCFG / DPULSE / APULSE strobes with their fields, and debug
// reads of fifo_chip that return the words in order, pop exactly one word each
// and read 0 when the FIFO is empty.
`timescale 1ns / 1ps

module tb_spi_config;
  import taichupix_pkg::*;
  logic clk = 0, rst_n = 1;
  logic csb = 1, sclk = 0, mosi = 0, miso;
  logic trig_mode, debug_mode, ser_en, prbs_en, pix_we, pix_mask, pix_pulse_en, dpulse, apulse, fifo_pop;
  logic [2:0] group_en, trig_window;
  logic [7:0] trig_latency, idac;
  logic [9:0] vdac;
  logic [6:0] pix_dcol, pix_addr;
  logic fifo_empty;
  logic [31:0] fifo_data;
  logic [6:0] fifo_count;
  logic [31:0] q[$];
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;
  int n_pixwe = 0, n_dp = 0, n_ap = 0;
  logic [6:0] last_dcol, last_addr;
  logic last_mask, last_pen;

  spi_config #(.CNT_W(7)) dut (.*);
  always #12.5 clk = ~clk;

  assign fifo_empty = (q.size() == 0);
  assign fifo_data  = fifo_empty ? 32'h0 : q[0];
  assign fifo_count = 7'(q.size());
  bit pop_due = 0;
  always @(negedge clk) begin
    if (pop_due) void'(q.pop_front());
    pop_due = fifo_pop;
  end
  always @(posedge clk) begin
    if (pix_we) begin n_pixwe++; last_dcol = pix_dcol; last_addr = pix_addr; last_mask = pix_mask; last_pen = pix_pulse_en; end
    if (dpulse) n_dp++;
    if (apulse) n_ap++;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // one 40-bit frame, SCLK period 100 ns
  task automatic frame(input bit wr, input logic [6:0] addr, input logic [31:0] wdata, output logic [31:0] rdata);
    logic [39:0] out;
    out = {wr, addr, wdata};
    rdata = '0;
    csb = 0; #100;
    for (int i = 39; i >= 0; i--) begin
      mosi = out[i]; #50;
      sclk = 1;
      if (i < 32) rdata = {rdata[30:0], miso};
      #50; sclk = 0;
    end
    #100; csb = 1; #200;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r;
    #60 rst_n = 1; #100;
    frame(0, REG_CTRL, 0, r);   chk(r == 32'h3C, "CTRL reset value");
    frame(0, REG_TRGLAT, 0, r); chk(r == 120, "latency reset value");
    frame(1, REG_CTRL, 32'h43, r);
    chk(trig_mode && debug_mode && group_en == 0 && !ser_en && prbs_en, "CTRL fields");
    frame(0, REG_CTRL, 0, r);   chk(r == 32'h43, "CTRL read back");
    frame(1, REG_TRGLAT, 200, r); chk(trig_latency == 200, "latency write");
    frame(1, REG_TRGWIN, 3, r);   chk(trig_window == 3, "window write");
    frame(1, REG_IDAC, 32'hA5, r); chk(idac == 8'hA5, "IDAC write");
    frame(1, REG_VDAC, 32'h2F3, r); chk(vdac == 10'h2F3, "VDAC write");
    frame(0, REG_VDAC, 0, r);     chk(r == 32'h2F3, "VDAC read back");
    frame(1, REG_PIXCFG, {16'h0, 1'b1, 1'b0, 7'd100, 7'd61}, r);
    chk(n_pixwe == 1 && last_dcol == 61 && last_addr == 100 && !last_mask && last_pen, "PIXCFG strobe");
    frame(1, REG_PULSE, 32'h1, r); chk(n_dp == 1 && n_ap == 0, "DPULSE strobe");
    frame(1, REG_PULSE, 32'h2, r); chk(n_dp == 1 && n_ap == 1, "APULSE strobe");
    // debug read of fifo_chip
    q.push_back(32'h8123_4567); q.push_back(32'hFEDC_BA98); q.push_back(32'h8000_0011);
    frame(0, REG_STATUS, 0, r); chk(r == 3, "fill level");
    for (int i = 0; i < 3; i++) begin
      logic [31:0] e;
      e = q[0];
      frame(0, REG_FIFO, 0, r);
      chk(r == e, $sformatf("FIFO word %0d: %h expected %h", i, r, e));
      chk(q.size() == 2 - i, "one pop per read");
    end
    frame(0, REG_FIFO, 0, r); chk(r == 0, "empty FIFO reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
