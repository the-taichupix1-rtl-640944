// tb_serializer - runs the serializer at 160 Mbps (bit clock 4 x 40 MHz, as in
// the 160 Mbps operating point) from a behavioural fifo_chip. The serial
// stream is cut into 32-bit words, most significant bit first, counted from
// the first bit after reset. Checks: every word taken from the FIFO appears
// once and in order, all other words are idle (0), with a full FIFO words go
// out back to back (one 32-bit word per 8 cycles of 40 MHz), the PRBS-2^7
// self-test stream obeys its recurrence, and a disabled serializer sends 0 and
// reads nothing.
`timescale 1ns / 1ps

module tb_serializer;
  logic clk = 0, clk_ser = 0, rst_n = 1;
  logic en = 1, prbs_en = 0, fifo_empty, fifo_pop, dout;
  logic [31:0] fifo_data;
  logic [31:0] q[$], sent[$];
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  serializer #(.W(32)) dut (.*);
  always #12.5 clk = ~clk;
  always #3.125 clk_ser = ~clk_ser;

  assign fifo_empty = (q.size() == 0);
  assign fifo_data  = fifo_empty ? 32'hDEAD_BEEF : q[0];
  // the pop seen before a rising edge takes effect after it
  bit pop_due = 0;
  always @(negedge clk) begin
    if (pop_due) begin sent.push_back(q[0]); void'(q.pop_front()); end
    pop_due = fifo_pop;
  end

  // deserializer
  logic [31:0] sh = 0;
  int nbit = 0, nword = 0;
  logic [31:0] words[$];
  bit capture = 0;
  bit pbits[$];
  always @(negedge clk_ser) if (capture) begin
    sh = {sh[30:0], dout};
    nbit++;
    pbits.push_back(dout);
    if (nbit % 32 == 0) words.push_back(sh);
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int first, last, nvalid;
    for (int i = 0; i < 40; i++) q.push_back({1'b1, 31'($urandom)});
    @(negedge clk); rst_n = 1; @(posedge clk_ser); capture = 1;
    // 40 words back to back need 40 x 8 = 320 cycles plus start-up
    repeat (400) @(negedge clk);
    for (int i = 0; i < 10; i++) q.push_back({1'b1, 31'($urandom)});
    repeat (200) @(negedge clk);
    capture = 0;
    // compare
    nvalid = 0; first = -1; last = -1;
    foreach (words[k]) begin
      if (words[k] != 0) begin
        checks++;
        if (nvalid >= sent.size() || words[k] != sent[nvalid]) begin failures++; $display("FAIL word %0d = %h (%0d)", k, words[k], nvalid); end
        if (nvalid == 0) first = k;
        if (nvalid == 39) last = k;
        nvalid++;
      end
    end
    checks += 2;
    if (nvalid != 50 || sent.size() != 50) begin failures++; $display("FAIL %0d words received, %0d popped", nvalid, sent.size()); end
    if (last - first != 39) begin failures++; $display("FAIL not back to back: first %0d last %0d", first, last); end
    // PRBS self-test
    pbits.delete();
    prbs_en = 1; repeat (4) @(negedge clk);
    capture = 1; repeat (100) @(negedge clk); capture = 0;
    for (int n = 7; n < pbits.size(); n++) begin
      checks++;
      if (pbits[n] != (pbits[n-6] ^ pbits[n-7])) begin failures++; $display("FAIL prbs bit %0d", n); break; end
    end
    // disabled
    prbs_en = 0; en = 0;
    q.push_back(32'h8000_0001);
    repeat (4) @(negedge clk);
    pbits.delete(); capture = 1; repeat (50) @(negedge clk); capture = 0;
    checks += 2;
    if (pbits.sum() with (int'(item)) != 0) begin failures++; $display("FAIL dout active while disabled"); end
    if (q.size() != 1) begin failures++; $display("FAIL popped while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
