// online_adder: radix-2 signed-digit online adder (OLA), online delay 2.
//
// Adds two digit streams x and y (radix 2, digits {-1,0,1} as (p,n) bit
// pairs, MSD first). Two rows of full adders do the work:
//   FA1 on x+, NOT x-, y+      -> carry h (one position up), inverted sum g
//   g and y- are held one cycle
//   FA2 on h, NOT g, NOT y-    -> inverted carry t, sum w
//   w is held one cycle; the digit of a position is (w, t) = w - t
// and the digit is registered on the output. Since the sum of two fractions
// needs one integer digit, the output stream is read as the fraction
// (x + y) / 2: its digit i is on the output in the cycle in which operand
// digit i+2 is on the input (online delay 2), and n operand digits give n+1
// result digits. Feeding zeros after the last operand digit flushes the exact
// sum.
//
// The gate-level structure, the inversions and the register placement follow
// the published online adder; clr and en are this implementation's own
// (synchronous clear before a new sum, clock enable for early termination).
module online_adder
  import dslot_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  sd_t  x,
  input  sd_t  y,
  output sd_t  z
);
  logic g_q, yn_q, w_q;
  sd_t  z_q;
  logic h, g, s2, c2, t;

  always_comb begin
    // FA1: x+ + (1 - x-) + y+ = 2h + (1 - g)
    h  = (x.p & ~x.n) | (x.p & y.p) | (~x.n & y.p);
    g  = ~(x.p ^ ~x.n ^ y.p);
    // FA2: h + (1 - g) + (1 - y-) = 2(1 - t) + w
    s2 = h ^ ~g_q ^ ~yn_q;
    c2 = (h & ~g_q) | (h & ~yn_q) | (~g_q & ~yn_q);
    t  = ~c2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q  <= 1'b0;
      yn_q <= 1'b0;
      w_q  <= 1'b0;
      z_q  <= SD_ZERO;
    end else if (clr) begin
      g_q  <= 1'b0;
      yn_q <= 1'b0;
      w_q  <= 1'b0;
      z_q  <= SD_ZERO;
    end else if (en) begin
      g_q  <= g;
      yn_q <= y.n;
      w_q  <= s2;
      z_q  <= '{p: w_q, n: t};
    end
  end

  assign z = z_q;

endmodule
