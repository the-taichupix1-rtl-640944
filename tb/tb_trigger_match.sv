// tb_trigger_match - checks the trigger & match decision with random head
// timestamps, latencies, windows and trigger histories against a reference
// written from the rule: in trigger mode a record with timestamp ts is kept if
// a trigger was seen at ts + latency + d, 0 <= d < window, and the decision is
// taken only once timer - ts >= latency + window; unmatched records are popped
// without a request. In triggerless mode every record is requested and popped
// on grant. The paper's example (3 us latency = 120 ticks, window 7) is one of
// the cases.
`timescale 1ns / 1ps

module tb_trigger_match;
  logic trig_mode, head_valid, grant, pop, out_valid;
  logic [7:0] latency, timer, head_ts;
  logic [2:0] window;
  logic [255:0] hist;
  int checks = 0, failures = 0;

  trigger_match dut (.*);

  task automatic check_case();
    int lat, win, age, m;
    bit dec, exp_valid, exp_pop;
    #1;
    lat = (latency > 240) ? 240 : latency;
    win = (window == 0) ? 1 : window;
    age = (timer - head_ts) & 255;
    dec = (age >= lat + win);
    m = 0;
    for (int d = 0; d < win; d++) if (hist[(head_ts + lat + d) & 255]) m = 1;
    if (!trig_mode) begin
      exp_valid = head_valid; exp_pop = head_valid && grant;
    end else begin
      exp_valid = head_valid && dec && m;
      exp_pop = head_valid && dec && (m ? grant : 1'b1);
    end
    checks += 2;
    if (out_valid != exp_valid || pop != exp_pop) begin
      failures++;
      $display("FAIL mode=%0d ts=%0d timer=%0d lat=%0d win=%0d valid=%0d/%0d pop=%0d/%0d",
               trig_mode, head_ts, timer, lat, win, out_valid, exp_valid, pop, exp_pop);
    end
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int matched = 0, dropped = 0;
    // the 3 us example: hit at timestamp 10, trigger at 130
    trig_mode = 1; latency = 120; window = 7; head_valid = 1; grant = 1;
    hist = '0; hist[130] = 1; head_ts = 10;
    timer = 136; check_case();                     // too young to decide
    checks++; if (out_valid || pop) begin failures++; $display("FAIL early decision"); end
    timer = 137; check_case();
    checks++; if (!out_valid || !pop) begin failures++; $display("FAIL example not matched"); end
    hist = '0; hist[137] = 1; check_case();         // trigger just outside the window
    checks++; if (out_valid || !pop) begin failures++; $display("FAIL out-of-window trigger kept"); end
    for (int t = 0; t < 20000; t++) begin
      trig_mode  = ($urandom_range(3) != 0);
      latency    = 8'($urandom_range(255));
      window     = 3'($urandom_range(7));
      head_ts    = 8'($urandom);
      timer      = 8'(head_ts + $urandom_range(255));
      head_valid = ($urandom_range(7) != 0);
      grant      = $urandom_range(1);
      hist = '0;
      for (int k = 0; k < 6; k++) hist[$urandom_range(255)] = 1'b1;
      if (t % 3 == 0) hist[8'(head_ts + (latency > 240 ? 240 : latency) + $urandom_range(6))] = 1'b1;
      check_case();
      if (trig_mode && out_valid) matched++;
      if (trig_mode && pop && !out_valid) dropped++;
    end
    checks++;
    if (matched == 0 || dropped == 0) begin failures++; $display("FAIL coverage %0d %0d", matched, dropped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
