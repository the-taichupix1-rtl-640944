// tb_taichupix1_top - end-to-end test of the full-size readout (96 double
// columns x 128 pixels, default parameters), with a 40 MHz system clock and a
// 160 MHz bit clock (160 Mbps serial output).
//
// Hits are injected on the discriminator inputs; the test keeps its own list
// of expected words {double column, pixel address, timestamp}, where the
// timestamp is the timer value in the first cycle after the hit was stored.
// Every word decoded from the serial output (or read over SPI in debug mode)
// must be in the list, and the list must be empty at the end of each phase.
// Phases: triggerless readout of both pixel schemes, a column FIFO overflow
// (hits wait in the pixels), trigger mode with matched and unmatched hits,
// readout groups switched off and on, mask and digital pulse configured over
// SPI, debug-mode readout over SPI with fifo_chip full, and the PRBS-2^7
// self-test. Each mechanism is counted and must have occurred.
module tb_taichupix1_top;
  import taichupix_pkg::*;

  logic clk = 0, clk_ser = 0, rst_n = 1;
  logic [127:0] outd [96];
  logic trigger = 0, csb = 1, sclk = 0, mosi = 0, miso, dout, apulse;
  logic [7:0] idac, timer;
  logic [9:0] vdac;

  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset

  int checks = 0, failures = 0;

  taichupix1_top dut (.*);

  always #12.5 clk = ~clk;
  always #3.125 clk_ser = ~clk_ser;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------------------------------------------------------- expected words
  int exp_words [logic [23:0]];     // {dcol[6:0], addr[6:0], ts[7:0]} -> count
  int n_expected = 0, n_received = 0;

  function automatic logic [23:0] key(input int d, input int a, input logic [7:0] ts);
    return {1'b0, 7'(d), 1'b0, 7'(a), ts};
  endfunction

  task automatic receive(input logic [31:0] w, input string src);
    logic [23:0] k;
    k = key(w[22:14], w[13:4], w[30:23]);
    checks++;
    if (w[3:0] != 0 || w[22:14] > 95 || w[13:4] > 127 || !exp_words.exists(k)) begin
      failures++; $display("FAIL unexpected %s word %h (t=%0t)", src, w, $time);
    end else begin
      exp_words[k]--;
      if (exp_words[k] == 0) exp_words.delete(k);
      n_received++;
      if (w[22:14] < 48) n_fei3++; else n_alpide++;
    end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_fei3 = 0, n_alpide = 0, n_shared_ts = 0, n_colfifo_stall = 0, n_chipfifo_full = 0;
  int n_trig_match = 0, n_trig_drop = 0, n_group_held = 0, n_idle = 0, n_debug = 0;
  int n_mask = 0, n_dpulse = 0, n_prbs = 0;

  // DPULSE is sampled by the pixels at the rising edge after it is seen; the
  // timestamp is the timer value in the cycle after that edge
  logic [7:0] dp_ts = 0;
  bit dp_seen = 0;
  int n_apulse = 0;
  always @(negedge clk) begin
    if (dp_seen) begin dp_ts = timer; dp_seen = 0; end
    if (dut.dpulse) dp_seen = 1;
    if (apulse) n_apulse++;
  end

  always @(negedge clk) if (rst_n) begin
    if ((dut.cf_full & dut.fastor) != 0) n_colfifo_stall++;
    if (dut.chip_full) n_chipfifo_full++;
    if (dut.trig_mode) begin
      n_trig_match += $countones(dut.req & dut.grant);
      n_trig_drop  += $countones(dut.cf_rd & ~dut.req);
    end
  end

  // ---------------------------------------------------------------- serial receiver
  bit capture = 0;
  logic [31:0] sh = 0;
  int nbit = 0;
  bit pbits [$];
  bit collect_prbs = 0;
  always @(negedge clk_ser) if (capture) begin
    sh = {sh[30:0], dout};
    nbit++;
    if (collect_prbs) pbits.push_back(dout);
    else if (nbit % 32 == 0) begin
      if (sh[31]) receive(sh, "serial");
      else begin
        n_idle++;
        checks++;
        if (sh != 0) begin failures++; $display("FAIL idle word %h", sh); end
      end
    end
  end

  // ---------------------------------------------------------------- SPI master (10 MHz)
  task automatic spi(input bit wr, input logic [6:0] addr, input logic [31:0] wdata, output logic [31:0] rdata);
    logic [39:0] o;
    o = {wr, addr, wdata};
    rdata = '0;
    csb = 0; #100;
    for (int i = 39; i >= 0; i--) begin
      mosi = o[i]; #50;
      sclk = 1;
      if (i < 32) rdata = {rdata[30:0], miso};
      #50; sclk = 0;
    end
    #100; csb = 1; #200;
  endtask

  task automatic set_ctrl(input bit trig, input bit dbg, input logic [2:0] grp, input bit ser, input bit prbs);
    logic [31:0] r;
    spi(1, REG_CTRL, 32'({prbs, ser, grp, dbg, trig}), r);
  endtask

  // ---------------------------------------------------------------- hit injection
  // one-cycle OUTD pulse on the listed pixels; 'expect' adds them to the list
  typedef struct { int d; int a; } pix_t;

  task automatic inject(input pix_t p [$], input bit expect_out);
    logic [7:0] ts;
    int per_dcol [int];
    @(negedge clk);
    foreach (p[i]) outd[p[i].d][p[i].a] = 1'b1;
    @(negedge clk);
    foreach (p[i]) outd[p[i].d][p[i].a] = 1'b0;
    ts = timer;                       // timer in the first cycle the hit is stored
    if (expect_out) foreach (p[i]) begin
      logic [23:0] k;
      k = key(p[i].d, p[i].a, ts);
      if (exp_words.exists(k)) exp_words[k]++; else exp_words[k] = 1;
      n_expected++;
      if (per_dcol.exists(p[i].d)) begin per_dcol[p[i].d]++; n_shared_ts++; end else per_dcol[p[i].d] = 1;
    end
  endtask

  function automatic pix_t P(input int d, input int a);
    pix_t x; x.d = d; x.a = a; return x;
  endfunction

  // random distinct pixels in one double column
  task automatic cluster(input int d, input int n, ref pix_t p [$]);
    bit used [128];
    for (int i = 0; i < n; i++) begin
      int a;
      do a = $urandom_range(127); while (used[a]);
      used[a] = 1;
      p.push_back(P(d, a));
    end
  endtask

  task automatic wait_drained(input int max_cycles, input string phase);
    int c;
    c = 0;
    while (exp_words.size() != 0 && c < max_cycles) begin @(negedge clk); c++; end
    chk(exp_words.size() == 0, $sformatf("%s: %0d words missing", phase, exp_words.size()));
    exp_words.delete();
  endtask

  initial begin
    #20ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pix_t p [$];
    logic [31:0] r;
    logic [7:0] ts0;
    foreach (outd[d]) outd[d] = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    @(posedge clk_ser); capture = 1;
    repeat (5) @(negedge clk);

    // ---- 1. triggerless readout, both schemes (clusters of 1..6 pixels)
    for (int t = 0; t < 12; t++) begin
      p.delete();
      cluster(t * 8 + (t % 8), 1 + t % 6, p);     // double columns 0..95, both halves
      inject(p, 1);
      repeat (40) @(negedge clk);
    end
    wait_drained(5000, "triggerless");

    // ---- 2. column FIFO overflow: 60 hits in one double column of each scheme
    p.delete(); cluster(5, 60, p); cluster(70, 60, p);
    inject(p, 1);
    wait_drained(20000, "overflow");

    // ---- 3. trigger mode, latency 3 us (120 ticks), window 7 ticks
    set_ctrl(1, 0, 3'b111, 1, 0);
    spi(1, REG_TRGLAT, 120, r);
    spi(1, REG_TRGWIN, 7, r);
    for (int t = 0; t < 8; t++) begin
      bit keep;
      keep = (t % 2 == 0);
      p.delete(); cluster(10 + t * 11, 3, p);
      inject(p, keep);
      ts0 = timer;
      if (keep) begin
        // trigger while the timer shows ts + latency + (t % 7)
        while (timer != 8'(ts0 + 120 + (t % 7))) @(negedge clk);
        trigger = 1; @(negedge clk); trigger = 0;
      end
      repeat (200) @(negedge clk);
    end
    wait_drained(5000, "trigger");
    set_ctrl(0, 0, 3'b111, 1, 0);

    // ---- 4. readout groups: only group 1 (double columns 32..63) enabled
    set_ctrl(0, 0, 3'b010, 1, 0);
    p.delete(); cluster(3, 4, p); cluster(40, 4, p); cluster(80, 4, p);
    inject(p, 1);
    repeat (300) @(negedge clk);
    n_group_held = $countones(dut.req[31:0]) + $countones(dut.req[95:64]);
    chk(exp_words.size() == 8, "only the enabled group was read");
    set_ctrl(0, 0, 3'b111, 1, 0);
    wait_drained(5000, "groups");

    // ---- 5. mask and digital pulse over SPI
    spi(1, REG_PIXCFG, {16'h0, 1'b1, 1'b0, 7'd10, 7'd3}, r);    // dcol 3 pixel 10: pulse enable
    spi(1, REG_PIXCFG, {16'h0, 1'b1, 1'b0, 7'd20, 7'd60}, r);   // dcol 60 pixel 20: pulse enable
    spi(1, REG_PIXCFG, {16'h0, 1'b0, 1'b1, 7'd33, 7'd7}, r);    // dcol 7 pixel 33: masked
    spi(1, REG_PIXCFG, {16'h0, 1'b0, 1'b1, 7'd90, 7'd77}, r);   // dcol 77 pixel 90: masked
    begin
      int n_before;
      n_before = n_received;
      spi(1, REG_PULSE, 32'h3, r);
      chk(n_apulse == 1, "APULSE strobe");
      exp_words[key(3, 10, dp_ts)] = 1;
      exp_words[key(60, 20, dp_ts)] = 1;
      n_expected += 2;
      wait_drained(2000, "digital pulse");
      n_dpulse = n_received - n_before;
      chk(n_dpulse == 2, "two pulsed pixels read");
    end
    p.delete(); p.push_back(P(7, 33)); p.push_back(P(77, 90));
    inject(p, 0);
    p.delete(); p.push_back(P(7, 34)); p.push_back(P(77, 91));
    inject(p, 1);
    begin
      int n_before;
      n_before = n_received;
      wait_drained(2000, "mask");
      repeat (200) @(negedge clk);
      n_mask = (n_received - n_before == 2) ? 2 : 0;
      chk(n_received - n_before == 2, "masked pixels not read");
    end

    // ---- 6. debug mode: serializer off, fifo_chip read over SPI, fifo_chip full
    capture = 0;
    set_ctrl(0, 1, 3'b111, 1, 0);
    p.delete();
    for (int d = 0; d < 96; d += 4) cluster(d, 4, p);   // 96 hits, more than fifo_chip holds
    inject(p, 1);
    repeat (400) @(negedge clk);
    spi(0, REG_STATUS, 0, r);
    chk(r == 64, $sformatf("fifo_chip full in debug mode (%0d)", r));
    for (int i = 0; i < 200 && exp_words.size() != 0; i++) begin
      spi(0, REG_FIFO, 0, r);
      if (r[31]) begin receive(r, "SPI"); n_debug++; end
    end
    wait_drained(10, "debug");
    chk(n_debug == 96, "all debug words read");

    // ---- 7. PRBS-2^7 self-test on the serial output
    set_ctrl(0, 0, 3'b111, 1, 1);
    collect_prbs = 1; capture = 1;
    repeat (100) @(negedge clk);
    capture = 0;
    for (int n = 7; n < pbits.size(); n++) if (pbits[n] == (pbits[n-6] ^ pbits[n-7])) n_prbs++;
    chk(n_prbs == pbits.size() - 7 && n_prbs > 300, "PRBS-2^7 stream");

    // ---- mechanism coverage
    $display("fei3 words %0d, alpide words %0d, shared timestamps %0d, column FIFO stall cycles %0d",
             n_fei3, n_alpide, n_shared_ts, n_colfifo_stall);
    $display("fifo_chip full cycles %0d, trigger matches %0d, trigger drops %0d, group-held requests %0d",
             n_chipfifo_full, n_trig_match, n_trig_drop, n_group_held);
    $display("idle words %0d, debug reads %0d, mask %0d, digital pulse %0d, PRBS bits %0d",
             n_idle, n_debug, n_mask, n_dpulse, n_prbs);
    chk(n_fei3 > 0, "FE-I3-like readout happened");
    chk(n_alpide > 0, "ALPIDE-like readout happened");
    chk(n_shared_ts > 0, "shared timestamp happened");
    chk(n_colfifo_stall > 0, "column FIFO stall happened");
    chk(n_chipfifo_full > 0, "fifo_chip full happened");
    chk(n_trig_match > 0, "trigger match happened");
    chk(n_trig_drop > 0, "trigger drop happened");
    chk(n_group_held > 0, "disabled group held back");
    chk(n_idle > 0, "idle words sent");
    chk(n_debug > 0, "debug read happened");
    chk(n_mask > 0, "mask happened");
    chk(n_dpulse > 0, "digital pulse happened");
    chk(n_prbs > 0, "PRBS self-test happened");
    chk(n_received == n_expected, $sformatf("received %0d of %0d words", n_received, n_expected));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
