// tb_sync_fifo - random push/pop test of the FIFO against a queue model:
// first-word-fall-through data order, empty/full/count flags, ignored push
// when full and ignored pop when empty.
`timescale 1ns / 1ps

module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  logic wr_en = 0, rd_en = 0, empty, full;
  logic [14:0] wr_data = 0, rd_data;
  logic [4:0] count;
  logic [14:0] q[$];
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(15), .DEPTH(16)) dut (.*);
  always #12.5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      bias = (t / 500) % 2 ? 70 : 30;             // phases that fill and drain
      @(negedge clk);
      checks += 3;
      if (empty != (q.size() == 0)) begin failures++; $display("FAIL empty"); end
      if (full != (q.size() == 16)) begin failures++; $display("FAIL full"); end
      if (count != 5'(q.size())) begin failures++; $display("FAIL count"); end
      if (q.size() > 0) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, q[0]); end
      end
      wr_en = ($urandom_range(99) < bias);
      rd_en = ($urandom_range(99) < 100 - bias);
      wr_data = 15'($urandom);
      @(posedge clk);
      begin
        int sz;
        sz = q.size();
        if (rd_en && sz > 0) void'(q.pop_front());
        if (wr_en && sz < 16) q.push_back(wr_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
