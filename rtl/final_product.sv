// final_product -- last multiplication of the recursion.
//
// When the recursion ends, one of the two remaining differences is 0 or 1,
// so their product is either 0 or the other difference: a multiplexer, no
// multiplier. value_o is that product's magnitude, with sign_i, the running
// sign of the recursion, passed on as value_sign_o. ok_o is 1 when one
// operand really is 0 or 1; the chain is long enough that this always holds.
//
// Combinational. The step ("multiply X' and Y' in the final stage, where one
// of X' or Y' is either 0 or 1") is the paper's; the multiplexer is the
// simplest circuit that does it.
module final_product #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] x_i,
  input  logic [WIDTH-1:0] y_i,
  input  logic             sign_i,
  output logic [WIDTH-1:0] value_o,
  output logic             value_sign_o,
  output logic             ok_o
);

  always_comb begin
    if (x_i == WIDTH'(1))      value_o = y_i;
    else if (y_i == WIDTH'(1)) value_o = x_i;
    else                       value_o = '0;
  end

  assign value_sign_o = sign_i;
  assign ok_o         = (x_i <= WIDTH'(1)) || (y_i <= WIDTH'(1));

endmodule
