// reduction_tree: binary tree of online adders.
//
// Reduces LEAVES digit streams to one. Every level is a row of online
// adders, each contributing online delay 2 and one digit of growth, so the
// root stream is sum(d) / 2^L with L = ceil(log2(LEAVES)) levels; its digit i
// appears 2L cycles after leaf digit i. The leaves are padded with zero
// streams up to 2^L (adders with two zero inputs reduce to constants in
// synthesis). LEAVES = 1 is a wire.
//
// Nodes are numbered as a heap: node 1 is the root, node i has children 2i
// and 2i+1, leaves are nodes 2^L .. 2^(L+1)-1. The tree shape follows the
// published processing engine; the zero padding for a leaf count that is not
// a power of two is this implementation's choice.
// With LEAVES = 1 (a processing block with a single input map) clk, rst_n,
// clr and en are unused; lint reports them as unused inputs, which is
// intended.
module reduction_tree
  import dslot_pkg::*;
#(
  parameter int unsigned LEAVES = 25
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  sd_t  d [LEAVES],
  output sd_t  z
);
  localparam int unsigned L  = $clog2(LEAVES);
  localparam int unsigned NP = 1 << L;

  sd_t node [1:2*NP-1];

  for (genvar j = 0; j < NP; j++) begin : g_leaf
    if (j < LEAVES) begin : g_in
      assign node[NP+j] = d[j];
    end else begin : g_pad
      assign node[NP+j] = SD_ZERO;
    end
  end

  for (genvar i = 1; i < NP; i++) begin : g_add
    online_adder u_ola (
      .clk, .rst_n, .clr, .en,
      .x(node[2*i]), .y(node[2*i+1]), .z(node[i])
    );
  end

  assign z = node[1];

endmodule
