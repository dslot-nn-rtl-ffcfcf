// processing_block: one pixel of a pooling window (PB).
//
// N_IN processing engines, one per input feature map, compute the K x K
// sums of products of their maps; an online adder tree sums the N_IN digit
// streams and the ReLU unit watches the result digits for a negative sign.
// The result stream is SOP / 2^(ceil(log2(K*K)) + ceil(log2(N_IN))) with
// P = 16 + ceil(log2(K*K)) + ceil(log2(N_IN)) digits; its first digit is on
// the ReLU input LAT = 2 + 2*(ceil(log2(K*K)) + ceil(log2(N_IN))) cycles
// after the first pixel digit. With N_IN = 1 (one input map) the adder tree is
// a wire, and the block is a PE with its ReLU unit.
//
// en freezes the engines and the tree; dv (from the control unit) marks the
// cycles that carry result digits. Structure as in the published general
// architecture.
module processing_block
  import dslot_pkg::*;
#(
  parameter int unsigned N_IN = 1,
  parameter int unsigned K    = 5,
  parameter int unsigned WB   = dslot_pkg::OPERAND_BITS,
  localparam int unsigned P   = dslot_pkg::p_out(K, N_IN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          dv,
  input  logic [WB-1:0] w [N_IN][K*K],
  input  sd_t           x [N_IN][K*K],
  output logic          neg,
  output logic [P:0]    value
);
  sd_t pe_z [N_IN];
  sd_t sop;

  for (genvar c = 0; c < N_IN; c++) begin : g_pe
    processing_engine #(.K(K), .WB(WB)) u_pe (
      .clk, .rst_n, .clr, .en,
      .w(w[c]), .x(x[c]), .z(pe_z[c])
    );
  end

  reduction_tree #(.LEAVES(N_IN)) u_tree (
    .clk, .rst_n, .clr, .en,
    .d(pe_z), .z(sop)
  );

  relu_unit #(.P(P)) u_relu (
    .clk, .rst_n, .clr,
    .dv(dv & en), .z(sop),
    .neg, .value
  );

endmodule
