// tb_workload_sr90 - the two source-run configurations of the chip's
// characterisation, on the full-size design with default parameters:
//   1. triggerless readout at 160 Mbps with only readout group 1 (double
//      columns 32..63, 64 pixel columns spanning both pixel schemes) enabled;
//   2. trigger mode with a 3 us latency (120 ticks) and a 175 ns window
//      (7 ticks), one trigger for some clusters and spurious triggers besides.
// Particles are random clusters of 2 or 3 neighbouring pixels (an average of
// about 2.6, the cluster size seen with the source) in random double columns of
// the enabled group, one every 25 to 55 cycles. A cluster is only placed in a
// double column that has been idle for 30 cycles, so its timestamp is the
// timer value in the cycle after the hit. In trigger mode a cluster is
// expected exactly when a trigger came 120..126 ticks after its timestamp.
// Every word from the serial output must be expected and every expected word
// must arrive.
module tb_workload_sr90;
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

  // ---------------------------------------------------------------- bookkeeping
  int exp_words [logic [23:0]];
  int n_expected = 0, n_received = 0, n_unexpected = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;   // read at falling edges only

  function automatic logic [23:0] key(input int d, input int a, input logic [7:0] ts);
    return {1'b0, 7'(d), 1'b0, 7'(a), ts};
  endfunction

  // serial receiver, word boundaries counted from reset
  bit capture = 0;
  logic [31:0] sh = 0;
  int nbit = 0;
  always @(negedge clk_ser) if (capture) begin
    sh = {sh[30:0], dout};
    nbit++;
    if (nbit % 32 == 0 && sh[31]) begin
      logic [23:0] k;
      k = key(sh[22:14], sh[13:4], sh[30:23]);
      checks++;
      if (!exp_words.exists(k)) begin
        failures++; n_unexpected++;
        if (n_unexpected < 10) $display("FAIL unexpected word %h (t=%0t)", sh, $time);
      end else begin
        exp_words[k]--;
        if (exp_words[k] == 0) exp_words.delete(k);
        n_received++;
      end
    end
  end

  // ---------------------------------------------------------------- SPI master
  task automatic spi(input bit wr, input logic [6:0] addr, input logic [31:0] wdata);
    logic [39:0] o;
    o = {wr, addr, wdata};
    csb = 0; #100;
    for (int i = 39; i >= 0; i--) begin
      mosi = o[i]; #50; sclk = 1; #50; sclk = 0;
    end
    #100; csb = 1; #200;
  endtask

  // ---------------------------------------------------------------- particles
  typedef struct { int d; int a; int n; logic [7:0] ts; longint c; } cl_t;
  cl_t clusters [$];
  longint last_used [96];

  task automatic particle(output cl_t cl);
    int d, a, n;
    do d = 32 + $urandom_range(31); while (cyc - last_used[d] < 30);
    n = 2 + ($urandom_range(9) < 6 ? 1 : 0);             // 2 or 3 pixels, mean 2.6
    a = $urandom_range(128 - n);
    @(negedge clk);
    for (int i = 0; i < n; i++) outd[d][a + i] = 1'b1;
    @(negedge clk);
    for (int i = 0; i < n; i++) outd[d][a + i] = 1'b0;
    cl.d = d; cl.a = a; cl.n = n; cl.ts = timer; cl.c = cyc;
    last_used[d] = cyc;
  endtask

  task automatic expect_cluster(input cl_t cl);
    for (int i = 0; i < cl.n; i++) begin
      logic [23:0] k;
      k = key(cl.d, cl.a + i, cl.ts);
      if (exp_words.exists(k)) exp_words[k]++; else exp_words[k] = 1;
      n_expected++;
    end
  endtask

  task automatic drain(input string phase);
    int c;
    c = 0;
    while (exp_words.size() != 0 && c < 20000) begin @(negedge clk); c++; end
    repeat (400) @(negedge clk);
    checks++;
    if (exp_words.size() != 0) begin failures++; $display("FAIL %s: %0d words missing", phase, exp_words.size()); end
    exp_words.delete();
  endtask

  initial begin
    #40ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // trigger line: triggers are queued as absolute cycle numbers
  longint trig_at [$];
  longint trig_seen [$];
  always @(negedge clk) begin
    trigger = 0;
    foreach (trig_at[i]) if (trig_at[i] == cyc) trigger = 1;
    if (trigger) trig_seen.push_back(cyc);
  end

  // trigger-mode reference: once a cluster is 127 cycles old every trigger
  // that can select it has been seen; it is expected if one came 120..126
  // cycles after its timestamp
  bit trig_phase = 0;
  int n_trig_kept = 0, n_trig_lost = 0;
  always @(negedge clk) if (trig_phase) begin
    while (clusters.size() > 0 && cyc - clusters[0].c >= 127) begin
      bit hit;
      hit = 0;
      foreach (trig_seen[j]) if (trig_seen[j] - clusters[0].c >= 120 && trig_seen[j] - clusters[0].c <= 126) hit = 1;
      if (hit) begin expect_cluster(clusters[0]); n_trig_kept++; end
      else n_trig_lost++;
      void'(clusters.pop_front());
    end
  end

  initial begin
    cl_t cl;
    int n1;
    foreach (outd[d]) outd[d] = '0;
    foreach (last_used[d]) last_used[d] = -100;
    @(negedge clk); @(negedge clk); rst_n = 1;
    @(posedge clk_ser); capture = 1;

    // ---- 1. triggerless, group 1 only
    spi(1, REG_CTRL, 32'({1'b0, 1'b1, 3'b010, 1'b0, 1'b0}));
    for (int t = 0; t < 300; t++) begin
      particle(cl);
      expect_cluster(cl);
      repeat ($urandom_range(55, 25)) @(negedge clk);
    end
    drain("triggerless");
    n1 = n_received;
    $display("triggerless: %0d clusters, %0d words", 300, n1);
    checks++; if (n1 == 0) failures++;

    // ---- 2. trigger mode, 3 us latency, 175 ns window
    spi(1, REG_TRGLAT, 120);
    spi(1, REG_TRGWIN, 7);
    spi(1, REG_CTRL, 32'({1'b0, 1'b1, 3'b010, 1'b0, 1'b1}));
    clusters.delete(); trig_seen.delete(); trig_phase = 1;
    for (int t = 0; t < 300; t++) begin
      particle(cl);
      clusters.push_back(cl);
      // the hit's timer value is cl.ts at cycle cl.c; trigger at ts + 120 + j
      if ($urandom_range(2) == 0) trig_at.push_back(cl.c + 120 + $urandom_range(6));
      if ($urandom_range(19) == 0) trig_at.push_back(cyc + $urandom_range(300));   // spurious
      repeat ($urandom_range(55, 25)) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    drain("trigger");
    $display("trigger mode: %0d clusters kept, %0d dropped, %0d triggers", n_trig_kept, n_trig_lost, trig_seen.size());
    checks += 2;
    if (n_trig_kept == 0 || n_trig_lost == 0) begin failures++; $display("FAIL trigger coverage"); end
    if (n_received != n_expected) begin failures++; $display("FAIL received %0d of %0d", n_received, n_expected); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
