// stoch_mul_pkg: constants shared by the bit-parallel deterministic stochastic
// multiplier. The operand width B = 8 is the size at which the multiplier is
// evaluated; every stream is N = 2**B bits wide and the Y-side decoder works on
// the B-1 low operand bits, giving H = 2**(B-1) transition-coded bits.
// The helper functions only derive these widths; they hold no logic.
package stoch_mul_pkg;

  // Operand width of the main configuration (8-bit operands, 256-bit streams).
  localparam int unsigned DEFAULT_B = 8;

  // Length of a unary stream for B-bit operands.
  function automatic int unsigned stream_len(input int unsigned b);
    return 1 << b;
  endfunction

  // Width of the Y-side decoder output: half a stream.
  function automatic int unsigned half_len(input int unsigned b);
    return 1 << (b - 1);
  endfunction

endpackage
