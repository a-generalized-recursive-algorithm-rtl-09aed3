// priority_encoder -- index of the most significant set bit.
//
// First half of the base calculator. The input word in_bits (B0..B7 at the
// default width) is scanned from the top; idx (A0..A2) is the position of
// the highest 1. For the operand 00110110 it gives idx = 101. any is 1 when
// the encoder is enabled and the input is not zero. With en low, or an all-
// zero input, idx is 0 and any is 0.
//
// Purely combinational. The block and its enable come from the paper's
// base-calculator drawing; the behaviour for a zero input or a low enable is
// this design's choice, the paper does not say.
module priority_encoder #(
  parameter int unsigned WIDTH = 8,
  localparam int unsigned IDX_W = (WIDTH < 2) ? 1 : $clog2(WIDTH)
) (
  input  logic             en,
  input  logic [WIDTH-1:0] in_bits,
  output logic [IDX_W-1:0] idx,
  output logic             any
);

  always_comb begin
    idx = '0;
    any = 1'b0;
    if (en) begin
      for (int unsigned i = 0; i < WIDTH; i++) begin
        if (in_bits[i]) begin
          idx = IDX_W'(i);
          any = 1'b1;
        end
      end
    end
  end

endmodule
