// base_calculator -- largest power of two not above the operand.
//
// A priority encoder finds the position of the operand's most significant 1
// and a decoder turns that position back into a one-hot word: the base.
// Example: operand 00110110 -> encoder 101 -> base 00100000. One enable,
// "enable when ready", drives the EN of both parts; while it is low the base
// is 0. exponent is the encoder output (log2 of the base) and nonzero tells
// whether the operand had any 1 at all.
//
// Purely combinational: the base is ready in the same clock cycle as the
// operand, as the paper states. The structure and the example are the
// paper's. The paper's algorithm can round the base up by one more power of
// two (second MSB rule); that is done by the caller, recursion_stage, not here.
module base_calculator #(
  parameter int unsigned WIDTH = 8,
  localparam int unsigned IDX_W = (WIDTH < 2) ? 1 : $clog2(WIDTH)
) (
  input  logic             en,
  input  logic [WIDTH-1:0] operand,
  output logic [WIDTH-1:0] base,
  output logic [IDX_W-1:0] exponent,
  output logic             nonzero
);

  priority_encoder #(.WIDTH(WIDTH)) u_enc (
    .en     (en),
    .in_bits(operand),
    .idx    (exponent),
    .any    (nonzero)
  );

  decoder #(.WIDTH(WIDTH)) u_dec (
    .en    (en & nonzero),
    .idx   (exponent),
    .onehot(base)
  );

endmodule
