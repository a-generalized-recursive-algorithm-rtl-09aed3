// vedic_pkg -- sizes shared by the blocks of the recursive Nikhilam multiplier.
//
// The multiplier breaks X1 * X2 into a chain of "recursions". Each recursion
// subtracts a power-of-two base from both multiplicands. The base is chosen
// from the smaller one: it is rounded to the nearest power of two, which is
// found from its MSB and the bit below it. So every recursion removes at
// least two bits from the smaller multiplicand, and a WIDTH-bit multiply
// needs at most ceil(WIDTH/2) recursions. That bound ("the worst case
// recursions being ceil(b/2)") is the paper's. It sets the length of the
// hardware chain; sizing the chain from it is this design's choice.
package vedic_pkg;

  // Number of recursion stages a WIDTH-bit multiplier needs in the worst case.
  function automatic int unsigned num_stages(input int unsigned width);
    return (width + 1) / 2;
  endfunction

  // Bits needed to hold a base exponent in 0..width (the base can be 2**width).
  function automatic int unsigned exp_bits(input int unsigned width);
    return (width < 2) ? 1 : $clog2(width + 1);
  endfunction

  // Bits needed to count 0..n.
  function automatic int unsigned count_bits(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

endpackage
