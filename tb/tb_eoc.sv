// tb_eoc - self-checking test of the end-of-column logic against a
// behavioural double column (pending-hit vector, highest address first).
// Checks: the timestamp is the timer value of the first cycle FASTOR is high
// and is shared by all hits of one FASTOR pulse; the first READ comes one
// cycle after FASTOR rises and then one READ every 2 cycles (50 ns per hit);
// each hit is written once into the column FIFO with its address; no READ is
// issued while the FIFO is full.
`timescale 1ns / 1ps

module tb_eoc;
  import taichupix_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [7:0] timer = 0;
  logic fastor, read, fifo_full = 0, wr_en;
  logic [6:0] address;
  col_hit_t wr_data;
  logic [127:0] pend = '0, inject = '0;
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0, nwrites = 0, ninject = 0;

  eoc dut (.*);
  always #12.5 clk = ~clk;

  // behavioural double column
  assign fastor = |pend;
  always_comb begin
    address = '0;
    for (int a = 0; a < 128; a++) if (pend[a]) address = 7'(a);
  end

  // reference timestamp / rhythm model, sampled at the falling edge
  logic fastor_q = 0;
  logic [7:0] exp_ts = 0;
  logic [127:0] clear_n = '0;
  int cyc = 0, rise_cyc = 0, last_read = -10;
  bit stalled = 0;

  always @(negedge clk) begin
    clear_n = '0;
    if (rst_n) begin
      if (fastor && !fastor_q) begin exp_ts = timer; rise_cyc = cyc; end
      if (read) begin
        checks++;
        if (last_read < rise_cyc) begin
          if (!stalled) begin
            checks++;
            if (cyc != rise_cyc + 1) begin failures++; $display("FAIL first read at %0d, rise %0d", cyc, rise_cyc); end
          end
        end else if (!stalled) begin
          checks++;
          if (cyc - last_read != 2) begin failures++; $display("FAIL read spacing %0d", cyc - last_read); end
        end
        last_read = cyc;
        clear_n = 128'(1) << address;
      end
      if (wr_en) begin
        checks += 2; nwrites++;
        if (wr_data.ts != exp_ts) begin failures++; $display("FAIL ts %0d exp %0d", wr_data.ts, exp_ts); end
        if (wr_data.addr != address || !pend[address]) begin failures++; $display("FAIL addr"); end
      end
      fastor_q = fastor;
      cyc++;
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      ninject += $countones(inject & ~(pend & ~clear_n));
      pend  <= (pend & ~clear_n) | inject;
      timer <= timer + 1;
    end
  end

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic hit(input int n);
    logic [127:0] h = '0;
    for (int k = 0; k < n; k++) h[$urandom_range(127)] = 1'b1;
    @(negedge clk); inject = h; @(negedge clk); inject = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    for (int t = 0; t < 30; t++) begin
      hit(1 + t % 4);
      repeat ($urandom_range(30, 12)) @(negedge clk);
    end
    // hits arriving while a burst is being read share its timestamp
    hit(4); repeat (3) @(negedge clk); hit(2);
    repeat (30) @(negedge clk);
    // FIFO full stall
    fifo_full = 1; stalled = 1;
    hit(3);
    repeat (10) @(negedge clk);
    checks += 2;
    if (!fastor) begin failures++; $display("FAIL hits must wait while full"); end
    if (read) begin failures++; $display("FAIL read while full"); end
    fifo_full = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nwrites != ninject || fastor) begin failures++; $display("FAIL writes %0d injected %0d", nwrites, ninject); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
