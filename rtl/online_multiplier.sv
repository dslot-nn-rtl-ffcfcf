// online_multiplier: radix-2 serial-parallel online multiplier (OLM).
//
// Computes z = x * Y where the weight Y is held in parallel (two's complement
// fraction -y0 + sum y_i 2^-i, WB bits) and x arrives one signed digit per
// cycle, most significant digit first. The product leaves one signed digit
// per cycle, also MSD first, with online delay DELTA = 2: digit z_j is on the
// output in the cycle in which x_{j+2} is on the input.
//
// Recurrence (residual W kept in carry-save form, WS/WC):
//   V[j]   = 2 W[j] + x_{j+2} * Y * 2^-2      (selector + shift right by 2 + [3:2] adder)
//   z_{j+1} = SELM(estimate of V[j])            (4-bit estimate: 2 integer, 2 fraction bits)
//   W[j+1] = V[j] - z_{j+1}                    (block M: subtract from the integer bits)
// For x = -1 the selector takes the complement of Y and the adder gets a carry
// in, as in the carry-in c_x of the published datapath. Selection, derived for
// |W| <= 3/4 with a truncated carry-save estimate: +1 if V >= 1/4, -1 if
// V <= -3/4, else 0.
// The first DELTA cycles after clr only load the residual and emit 0. Once
// all input digits have been fed (zeros after the last one) the emitted
// digits equal the exact product: with 8-digit inputs and 8-bit weights, 16
// digits carry the whole product.
//
// The datapath (selector, shift, [3:2] adder, WS/WC, V, SELM, M) follows the
// published block diagram; the selection constants, the residual width of
// WB+3 bits and the unregistered digit output (which keeps the online delay at
// 2, the value the design's cycle count uses) are this implementation's own.
//
// Interface: clr starts a new product (clears W); en freezes all state when
// low (used for early termination). z is combinational from the registers
// and the current x.
module online_multiplier
  import dslot_pkg::*;
#(
  parameter int unsigned WB    = dslot_pkg::OPERAND_BITS,
  parameter int unsigned DELTA = dslot_pkg::DELTA_MUL
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [WB-1:0] y,
  input  sd_t           x,
  output sd_t           z
);
  // Residual: 2 integer bits (sign included) and F fraction bits; Y*2^-2
  // has WB-1+2 fraction bits.
  localparam int unsigned F  = WB + 1;
  localparam int unsigned RW = F + 2;

  logic [RW-1:0] ws_q, wc_q;              // REG WS, REG WC
  logic [$clog2(DELTA+1)-1:0] init_q;     // counts the DELTA initial cycles

  logic [RW-1:0] ysx, addend, vs, vc, ws_d;
  logic          cx;
  logic [3:0]    vhat;
  logic          init_done;
  sd_t           zsel;

  always_comb begin
    // Selector: Y, its complement, or 0 by the input digit; already aligned
    // to 2^-2 because Y's LSB sits at F fraction bits.
    ysx = RW'($signed(y));
    unique case ({x.p, x.n})
      2'b10:   begin addend = ysx;  cx = 1'b0; end
      2'b01:   begin addend = ~ysx; cx = 1'b1; end
      default: begin addend = '0;   cx = 1'b0; end
    endcase
    // [3:2] adder on 2WS, 2WC and the addend; cx enters the free carry LSB.
    vs = (ws_q << 1) ^ (wc_q << 1) ^ addend;
    vc = ((((ws_q << 1) & (wc_q << 1)) | ((ws_q << 1) & addend) | ((wc_q << 1) & addend)) << 1)
         | RW'(cx);
    // V: 4-bit estimate of the top bits of both carry-save words.
    vhat = vs[RW-1 -: 4] + vc[RW-1 -: 4];
    // SELM
    init_done = (init_q == DELTA[$clog2(DELTA+1)-1:0]);
    zsel = SD_ZERO;
    if (init_done) begin
      if (!vhat[3] && vhat != 4'd0)  zsel = '{p: 1'b1, n: 1'b0};  // >= 1/4
      else if ($signed(vhat) <= -3)  zsel = '{p: 1'b0, n: 1'b1};  // <= -3/4
    end
    // M: W = V - z, z weighted 2^0 (bit F).
    ws_d = vs;
    if (zsel.p) ws_d = vs - (RW'(1) << F);
    if (zsel.n) ws_d = vs + (RW'(1) << F);
  end

  assign z = zsel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws_q   <= '0;
      wc_q   <= '0;
      init_q <= '0;
    end else if (clr) begin
      ws_q   <= '0;
      wc_q   <= '0;
      init_q <= '0;
    end else if (en) begin
      ws_q <= ws_d;
      wc_q <= vc;
      if (!init_done) init_q <= init_q + 1'b1;
    end
  end

  // Convergence: the residual never leaves [-3/4, 3/4] (units of 2^-F).
  logic [RW-1:0] w_sum;
  assign w_sum = ws_q + wc_q;
  a_residual_bound: assert property (@(posedge clk) disable iff (!rst_n)
    ($signed(w_sum) <= $signed(RW'(3 << (F - 2)))) && ($signed(w_sum) >= -$signed(RW'(3 << (F - 2)))));

endmodule
