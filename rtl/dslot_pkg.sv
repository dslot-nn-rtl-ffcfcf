// dslot_pkg: types and constants shared by the digit-serial (online) datapath.
//
// A radix-2 signed digit d in {-1, 0, +1} travels as two bits (p, n) with
// d = p - n, most significant digit first. (1,1) is a legal second encoding
// of zero. Fractions are used throughout: the first digit of a stream has
// weight 2^-1.
//
// The delays and sizes below follow the convolution engine of the design:
// online delay 2 for the multiplier and for the adder, 8-bit operands,
// 16-digit products and 21-digit sums of 25 products.
package dslot_pkg;

  typedef struct packed {
    logic p;   // positive part
    logic n;   // negative part
  } sd_t;

  localparam sd_t SD_ZERO = '{p: 1'b0, n: 1'b0};

  localparam int unsigned DELTA_MUL = 2;   // online delay of the multiplier
  localparam int unsigned DELTA_ADD = 2;   // online delay of the adder
  localparam int unsigned OPERAND_BITS = 8; // bits of a pixel and of a weight

  // Digits of one product (2 x WB) and of the result of a K x K window
  // summed over N_IN input maps: eq. p_out = p_mult + ceil(log2(K*K)) (+ ceil(log2 N_IN)).
  function automatic int unsigned p_out(input int unsigned k, input int unsigned n_in);
    return 2 * OPERAND_BITS + $clog2(k * k) + $clog2(n_in);
  endfunction

  // Cycles from the first input digit to the last result digit:
  // delta_x + delta_+ * (ceil(log2(K*K)) + ceil(log2(N_IN))) + p_out.
  function automatic int unsigned num_cycles(input int unsigned k, input int unsigned n_in);
    return DELTA_MUL + DELTA_ADD * ($clog2(k * k) + $clog2(n_in)) + p_out(k, n_in);
  endfunction

  function automatic int sd_value(input sd_t d);
    return int'(d.p) - int'(d.n);
  endfunction

endpackage
