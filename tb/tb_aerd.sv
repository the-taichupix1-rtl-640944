// tb_aerd - self-checking test of the AERD tree: for random STATE patterns the
// encoded address must be the lowest set index, valid must be the OR of all
// bits, and a READ must produce a one-hot reset at exactly that index.
`timescale 1ns / 1ps

module tb_aerd;
  localparam int N = 128;
  logic [N-1:0] state, clr;
  logic read, valid;
  logic [6:0] addr;
  int checks = 0, failures = 0;

  aerd #(.N(N)) dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s state=%h addr=%0d clr=%h", what, state, addr, clr); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int first;
      state = '0;
      case (t % 4)
        0: state[$urandom_range(N-1)] = 1'b1;
        1: state = {$urandom, $urandom, $urandom, $urandom};
        2: for (int k = 0; k < 3; k++) state[$urandom_range(N-1)] = 1'b1;
        default: if (t % 8 == 3) state = '0; else state = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      endcase
      read = $urandom_range(1);
      #1;
      first = -1;
      for (int i = N - 1; i >= 0; i--) if (state[i]) first = i;
      chk(valid == (first >= 0), "valid");
      if (first >= 0) chk(addr == 7'(first), "address is lowest set index");
      if (read && first >= 0) chk(clr == (128'(1) << first), "one-hot reset at read pixel");
      else chk(clr == '0, "no reset without read");
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
