// aerd - Address Encoder and Reset Decoder for one ALPIDE-like double column.
//
// A binary tree of priority nodes. Going up, each node reports whether any
// pixel below it holds a hit (valid) and the address of the first such pixel,
// the left (lower-index) branch winning. Going down, a READ enters at the
// root and every node passes it to the branch it chose, so exactly the pixel
// whose address is at the root output receives its one-hot reset. state index
// is the priority order: index 0 is read first.
//
// Interface: state[N] in, read in; valid, addr, clr[N] out. The tree is purely
// combinational; the reset takes effect at the clock edge that ends the READ
// cycle in the pixel flip-flops, so one hit is read per READ cycle. The chip's
// "boosting speed" variant, which also reads on the falling clock edge, is not
// reproduced: only the standard one-read-per-rising-edge readout is built.
`timescale 1ns / 1ps

module aerd #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0]         state,
  input  logic                 read,
  output logic                 valid,
  output logic [$clog2(N)-1:0] addr,
  output logic [N-1:0]         clr
);

  localparam int unsigned L  = $clog2(N);
  localparam int unsigned AW = $clog2(N);

  // encoder: level k has N >> k nodes
  for (genvar k = 0; k <= L; k++) begin : lvl
    localparam int unsigned M = N >> k;
    logic [M-1:0]  v;
    logic [AW-1:0] a [M];
    if (k == 0) begin : g_leaf
      assign v = state;
      for (genvar j = 0; j < M; j++) begin : g_a
        assign a[j] = AW'(j);
      end
    end else begin : g_node
      for (genvar j = 0; j < M; j++) begin : g_n
        assign v[j] = lvl[k-1].v[2*j] | lvl[k-1].v[2*j+1];
        assign a[j] = lvl[k-1].v[2*j] ? lvl[k-1].a[2*j] : lvl[k-1].a[2*j+1];
      end
    end
  end

  // reset decoder: enable flows from the root to the chosen leaf
  for (genvar k = 0; k <= L; k++) begin : dec
    localparam int unsigned M = N >> k;
    logic [M-1:0] en;
    if (k == L) begin : g_root
      assign en[0] = read & lvl[L].v[0];
    end else begin : g_node
      for (genvar j = 0; j < M; j++) begin : g_n
        if (j % 2 == 0) begin : g_left
          assign en[j] = dec[k+1].en[j/2] & lvl[k].v[j];
        end else begin : g_right
          assign en[j] = dec[k+1].en[j/2] & lvl[k].v[j] & ~lvl[k].v[j-1];
        end
      end
    end
  end

  assign valid = lvl[L].v[0];
  assign addr  = lvl[L].a[0];
  assign clr   = dec[0].en;

endmodule
