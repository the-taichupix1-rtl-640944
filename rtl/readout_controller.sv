// readout_controller - moves hit records from the double columns into
// fifo_chip and builds the 32-bit output word.
//
// The double columns form N_GROUP fast readout groups of DCOL_PER_GROUP
// double columns each (3 groups of 32 double columns = 64 pixel columns). Per
// clock cycle at most one record is taken: the lowest-numbered enabled group
// that has a request is served, so only one group is read out at a time, and
// inside that group the double columns are served round-robin, giving each
// column the same priority. The granted column's record becomes the word
//   [31] 1 (data available) [30:23] timestamp [22:14] double column
//   [13:4] pixel address     [3:0] pattern = 0
// which is written into fifo_chip in the same cycle; no grant is given while
// fifo_chip is full. grant is one-hot and combinational.
// Group priority and round-robin inside a group are this design's reading of
// the chip's group readout; the word layout is the chip's.
`timescale 1ns / 1ps

module readout_controller
  import taichupix_pkg::*;
#(
  parameter int unsigned N_GRP  = 3,
  parameter int unsigned PER_GRP = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_GRP-1:0]        group_en,
  input  logic [N_GRP*PER_GRP-1:0] req,
  input  col_hit_t                data [N_GRP*PER_GRP],
  output logic [N_GRP*PER_GRP-1:0] grant,
  input  logic                    fifo_full,
  output logic                    wr_en,
  output out_word_t               wr_data
);

  localparam int unsigned N  = N_GRP * PER_GRP;
  localparam int unsigned PW = (PER_GRP > 1) ? $clog2(PER_GRP) : 1;

  logic [PW-1:0] rr [N_GRP];      // next column to favour in each group
  logic          found;
  int unsigned   sel_g, sel_i;

  always_comb begin
    found = 1'b0;
    sel_g = 0;
    sel_i = 0;
    for (int g = 0; g < N_GRP; g++) begin
      for (int k = 0; k < PER_GRP; k++) begin
        int unsigned i;
        i = (int'(rr[g]) + k) % PER_GRP;
        if (!found && group_en[g] && req[g*PER_GRP + i]) begin
          found = 1'b1;
          sel_g = g;
          sel_i = i;
        end
      end
    end
  end

  always_comb begin
    grant = '0;
    if (found && !fifo_full) grant[sel_g*PER_GRP + sel_i] = 1'b1;
  end

  assign wr_en           = found && !fifo_full;
  assign wr_data.avail   = 1'b1;
  assign wr_data.ts      = data[sel_g*PER_GRP + sel_i].ts;
  assign wr_data.dcol    = 9'(sel_g*PER_GRP + sel_i);
  assign wr_data.row     = 10'(data[sel_g*PER_GRP + sel_i].addr);
  assign wr_data.pattern = 4'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < N_GRP; g++) rr[g] <= '0;
    end else if (wr_en) begin
      rr[sel_g] <= PW'((sel_i + 1) % PER_GRP);
    end
  end

  initial assert (N <= 512) else $error("readout_controller: more double columns than Addr_Dcol can hold");

endmodule
