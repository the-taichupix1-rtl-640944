// tb_readout_controller - checks the group readout against a reference:
// at most one grant per cycle, the lowest enabled group with a request is
// served, double columns inside the group are served round-robin (after
// column i the search starts at i + 1), no grant while fifo_chip is full,
// disabled groups are never served, and the 32-bit word carries
// data-available = 1, the timestamp, the double-column index, the pixel
// address and pattern 0 at the bit positions of the output format.
`timescale 1ns / 1ps

module tb_readout_controller;
  import taichupix_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [2:0] group_en = 3'b111;
  logic [95:0] req = '0, grant;
  col_hit_t data [96];
  logic fifo_full = 0, wr_en;
  out_word_t wr_data;
  int rr_model [3] = '{0, 0, 0};
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  readout_controller #(.N_GRP(3), .PER_GRP(32)) dut (.*);
  always #12.5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int served [3] = '{0, 0, 0};
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int eg, ei;
      logic [31:0] w;
      @(negedge clk);
      for (int i = 0; i < 96; i++) begin
        data[i].ts = 8'($urandom); data[i].addr = 7'($urandom);
        req[i] = ($urandom_range(99) < ((t / 400) % 2 ? 3 : 30));
      end
      group_en  = (t % 1000 < 500) ? 3'b111 : 3'($urandom_range(7));
      fifo_full = ($urandom_range(9) == 0);
      #1;
      // reference choice
      eg = -1; ei = -1;
      for (int g = 0; g < 3 && eg < 0; g++)
        if (group_en[g])
          for (int k = 0; k < 32; k++) begin
            int i;
            i = (rr_model[g] + k) % 32;
            if (eg < 0 && req[g*32 + i]) begin eg = g; ei = i; end
          end
      checks++;
      if (eg < 0 || fifo_full) begin
        if (wr_en || grant != 0) begin failures++; $display("FAIL unexpected grant"); end
      end else begin
        w = wr_data;
        if (!wr_en || grant != (96'(1) << (eg*32 + ei))) begin
          failures++; $display("FAIL grant exp g%0d i%0d got %h", eg, ei, grant);
        end
        checks++;
        if (w[31] != 1'b1 || w[30:23] != data[eg*32+ei].ts || w[22:14] != 9'(eg*32+ei) ||
            w[13:4] != 10'(data[eg*32+ei].addr) || w[3:0] != 4'd0) begin
          failures++; $display("FAIL word %h", w);
        end
        served[eg]++;
      end
      @(posedge clk);
      if (eg >= 0 && !fifo_full) rr_model[eg] = (ei + 1) % 32;
    end
    checks++;
    if (served[0] == 0 || served[1] == 0 || served[2] == 0) begin failures++; $display("FAIL a group never served"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
