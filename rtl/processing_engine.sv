// processing_engine: one convolution window as a digit-serial sum of products.
//
// K*K online multipliers, one per window pixel, each holding its kernel
// weight in parallel and receiving its pixel one signed digit per cycle (MSD
// first), feed an online reduction tree. The output stream is
// SOP / 2^ceil(log2(K*K)); its digit i leaves 2 + 2*ceil(log2(K*K)) cycles
// after input digit i was presented (12 cycles for K = 5). With 8-bit pixels
// and weights the products have 16 digits and the sum 21.
//
// clr starts a new window; en (from the control unit) freezes every register
// of the engine when the window's result is known to be negative.
// Structure as in the published processing engine; the shared enable is this
// implementation's reading of the control line drawn to the multipliers.
module processing_engine
  import dslot_pkg::*;
#(
  parameter int unsigned K  = 5,
  parameter int unsigned WB = dslot_pkg::OPERAND_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [WB-1:0] w [K*K],
  input  sd_t           x [K*K],
  output sd_t           z
);
  sd_t prod [K*K];

  for (genvar i = 0; i < K*K; i++) begin : g_olm
    online_multiplier #(.WB(WB)) u_olm (
      .clk, .rst_n, .clr, .en,
      .y(w[i]), .x(x[i]), .z(prod[i])
    );
  end

  reduction_tree #(.LEAVES(K*K)) u_tree (
    .clk, .rst_n, .clr, .en,
    .d(prod), .z
  );

endmodule
