// relu_unit: ReLU with early detection of negative results.
//
// The sum-of-products digits arrive MSD first (dv marks a result digit). The
// unit appends each digit's two bits to the registers zp (positive parts) and
// zn (negative parts). Since zp - zn is the value of the digits seen so far,
// and the digits still to come can change it by less than one unit of the
// last digit, the result is negative as soon as zp < zn as unsigned numbers.
// The unit then raises neg (combinationally, in the cycle of the deciding
// digit, and held afterwards) so the control unit can stop the computation;
// the stored digits are frozen.
//
// value is the ReLU output in two's complement with P fraction bits: 0 after
// a negative decision, otherwise zp - zn, shifted left when fewer than P
// digits were collected (reduced run-time precision).
// The register pair and the comparison follow the published termination
// algorithm; the final subtraction and the precision shift are this
// implementation's choice.
module relu_unit
  import dslot_pkg::*;
#(
  parameter int unsigned P = 21
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         dv,
  input  sd_t          z,
  output logic         neg,
  output logic [P:0]   value
);
  logic [P-1:0]           zp_q, zn_q;
  logic [$clog2(P+1)-1:0] cnt_q;
  logic                   neg_q;
  logic [P-1:0]           zp_d, zn_d;
  logic                   take, neg_now;
  logic signed [P:0]      diff;

  always_comb begin
    take    = dv && !neg_q && (cnt_q < P[$clog2(P+1)-1:0]);
    zp_d    = {zp_q[P-2:0], z.p};
    zn_d    = {zn_q[P-2:0], z.n};
    neg_now = take && (zp_d < zn_d);
    neg     = neg_q | neg_now;
    diff    = $signed({1'b0, zp_q}) - $signed({1'b0, zn_q});
    value   = (neg_q || diff < 0) ? '0
            : (P+1)'(diff <<< (P[$clog2(P+1)-1:0] - cnt_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zp_q  <= '0;
      zn_q  <= '0;
      cnt_q <= '0;
      neg_q <= 1'b0;
    end else if (clr) begin
      zp_q  <= '0;
      zn_q  <= '0;
      cnt_q <= '0;
      neg_q <= 1'b0;
    end else if (take) begin
      zp_q  <= zp_d;
      zn_q  <= zn_d;
      cnt_q <= cnt_q + 1'b1;
      neg_q <= neg_now;
    end
  end

  // Once a result is known to be negative it stays so until the next clear.
  a_neg_sticky: assert property (@(posedge clk) disable iff (!rst_n)
    (neg_q && !clr) |=> neg_q);

endmodule
