// tb_pixel_fei3 - self-checking test of one FE-I3-like pixel: hit storage,
// priority chain, address output, clear by READ, level re-set while OUTD stays
// high, mask and gated digital pulse.
`timescale 1ns / 1ps

module tb_pixel_fei3;
  logic clk = 0, rst_n = 1;
  logic outd = 0, dpulse = 0, cfg_we = 0, cfg_mask = 0, cfg_pulse_en = 0, prev_busy = 0, read = 0;
  logic next_busy, hit;
  logic [6:0] addr_out;
  initial #2 rst_n = 0;             // falling edge starts the asynchronous reset
  int checks = 0, failures = 0;

  localparam logic [6:0] A = 7'd85;
  pixel_fei3 #(.ADDR(A)) dut (.*);

  always #12.5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    step(); rst_n = 1; step();
    chk(!hit && !next_busy && addr_out == 0, "idle after reset");
    // hit
    outd = 1; step(); outd = 0; #1;
    chk(hit && next_busy && addr_out == A, "hit stored, address driven");
    // higher-priority pixel busy: not selected
    prev_busy = 1; #1;
    chk(addr_out == 0 && next_busy, "blocked by previous pixel");
    read = 1; step(); read = 0; #1;
    chk(hit, "read while not selected does not clear");
    prev_busy = 0; #1;
    read = 1; step(); read = 0; #1;
    chk(!hit && !next_busy && addr_out == 0, "cleared by read");
    // level-set: OUTD held high through a read sets the hit again
    outd = 1; step(); read = 1; step(); read = 0; #1;
    chk(hit, "re-stored while OUTD high");
    outd = 0; read = 1; step(); read = 0; #1;
    chk(!hit, "cleared after OUTD low");
    // mask
    cfg_we = 1; cfg_mask = 1; step(); cfg_we = 0;
    outd = 1; step(); step(); outd = 0; #1;
    chk(!hit, "masked pixel ignores OUTD");
    // digital pulse needs pulse enable
    cfg_we = 1; cfg_mask = 0; cfg_pulse_en = 0; step(); cfg_we = 0;
    dpulse = 1; step(); dpulse = 0; #1;
    chk(!hit, "DPULSE ignored without pulse enable");
    cfg_we = 1; cfg_pulse_en = 1; step(); cfg_we = 0;
    dpulse = 1; step(); dpulse = 0; #1;
    chk(hit && addr_out == A, "DPULSE with pulse enable stores a hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
