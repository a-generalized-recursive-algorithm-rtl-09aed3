// sign_unit -- sign of a product from the signs of its factors.
//
// The product of two sign-magnitude numbers has the EX-OR of their sign bits
// as its sign. Here 1 means negative and 0 positive. The multiplier uses it
// twice: on the operands' sign bits in signed mode, and inside each
// recursion to track the sign of the product of two differences, which can
// be negative when the base lies above a multiplicand.
//
// Combinational, one gate. The EX-OR is the paper's. The paper writes that
// "'1' denotes positive and '0' denotes negative"; with that coding EX-OR
// would give the wrong sign for two positive factors, so the usual coding
// (1 = negative) is used instead.
module sign_unit (
  input  logic sign_a,
  input  logic sign_b,
  output logic sign_p
);

  assign sign_p = sign_a ^ sign_b;

endmodule
