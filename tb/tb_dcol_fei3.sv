// tb_dcol_fei3 - self-checking test of one fei3 double column (128 pixels).
// Random sets of pixels are hit; the test reads them with READ pulses (one
// cycle high, one low, as the end of column does) and checks that FASTOR is
// high exactly while hits are pending, that addresses come out in priority
// order, descending (127 first, top pixel), each hit once, and that a 3-hit cluster is drained within the
// 500 ns dead-time budget. Masking one pixel through the configuration port
// must hide its hits.
`timescale 1ns / 1ps

module tb_dcol_fei3;
  logic clk = 0, rst_n = 1;
  logic [127:0] outd = '0;
  logic dpulse = 0, cfg_we = 0, cfg_mask = 0, cfg_pulse_en = 0, read = 0;
  logic [6:0] cfg_addr = '0;
  logic fastor;
  logic [6:0] address;
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  dcol_fei3 #(.N_PIX(128)) dut (.*);
  always #12.5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // inject hits, then drain and compare
  task automatic run(input logic [127:0] hits, input logic [127:0] masked);
    logic [127:0] pend;
    int exp_addr, cycles;
    pend = hits & ~masked;
    outd = hits; step(); outd = '0;
    chk(fastor == (pend != 0), "FASTOR after hits");
    cycles = 0;
    while (pend != 0 && cycles < 1000) begin
      exp_addr = -1; for (int a = 127; a >= 0; a--) if (pend[a] && exp_addr < 0) exp_addr = a;
      read = 1; #1;
      chk(address == 7'(exp_addr), $sformatf("address %0d expected %0d", address, exp_addr));
      step(); read = 0; pend[exp_addr] = 1'b0;
      chk(fastor == (pend != 0), "FASTOR while draining");
      step(); cycles += 2;
    end
    chk(!fastor, "drained");
  endtask

  initial begin
    logic [127:0] h;
    realtime t0;
    step(); rst_n = 1; step();
    chk(!fastor, "idle");
    for (int t = 0; t < 40; t++) begin
      h = '0;
      for (int k = 0; k < 1 + (t % 6); k++) h[$urandom_range(127)] = 1'b1;
      run(h, '0);
    end
    run('1, '0);                       // full double column
    // 3-hit cluster: dead time
    h = '0; h[40] = 1; h[41] = 1; h[43] = 1;
    t0 = $realtime;
    run(h, '0);
    chk($realtime - t0 < 500.0, "3-hit cluster read within 500 ns");
    // mask pixel 77
    cfg_addr = 7'd77; cfg_mask = 1; cfg_we = 1; step(); cfg_we = 0;
    h = '0; h[77] = 1; h[12] = 1;
    run(h, h & (128'(1) << 77));
    h = '0; h[77] = 1; outd = h; step(); outd = '0;
    chk(!fastor, "masked pixel alone gives no FASTOR");
    // digital pulse on pixel 5 only
    cfg_addr = 7'd5; cfg_mask = 0; cfg_pulse_en = 1; cfg_we = 1; step(); cfg_we = 0;
    dpulse = 1; step(); dpulse = 0; #1;
    chk(fastor, "DPULSE hit");
    read = 1; #1; chk(address == 7'd5, "DPULSE address"); step(); read = 0; step();
    chk(!fastor, "DPULSE hit read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
