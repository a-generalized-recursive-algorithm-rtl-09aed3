// recursion_stage -- one recursion of the Nikhilam multiplication.
//
// The stage receives the magnitudes x_i, y_i of the two numbers still to be
// multiplied and the sign of their product, sign_i. It
//   1. selects the smaller magnitude X and the larger Y;
//   2. stops if X is 0 or 1: nothing is done and the inputs pass through;
//   3. else finds the base B with the base calculator (the MSB power of X)
//      and doubles it when the second MSB of X is 1, so B is the power of two
//      nearest to X;
//   4. subtracts B from both: X' = X - B, Y' = Y - B (either may be negative);
//   5. hands |X'|, |Y'| to the next stage, with the sign of X' * Y' folded
//      into the running sign by two sign_units;
//   6. outputs the partial result X + Y' (never negative), which stands for
//      (X + Y') * B, i.e. partial_o shifted left by shift_o = log2(B), and
//      carries the sign partial_sign_o = sign_i.
// Since X * Y = (X + Y') * B + X' * Y', the partial results of all stages
// plus the last product of differences add up to the product.
//
// active_i says the recursion has not yet ended; the base calculator is
// enabled only when active_i is high and X > 1. active_o is 1 when this
// stage did a recursion. Purely combinational.
//
// Steps 1 to 6 are the paper's algorithm; the rounding rule is its step 3.
// Carrying negative differences as magnitude plus sign is this design's
// choice: the paper does not say how a negative difference is held.
module recursion_stage
  import vedic_pkg::*;
#(
  parameter int unsigned WIDTH = 8,
  localparam int unsigned EXP_W = exp_bits(WIDTH),
  localparam int unsigned IDX_W = (WIDTH < 2) ? 1 : $clog2(WIDTH)
) (
  input  logic             active_i,
  input  logic [WIDTH-1:0] x_i,
  input  logic [WIDTH-1:0] y_i,
  input  logic             sign_i,
  output logic             active_o,
  output logic [WIDTH-1:0] x_o,
  output logic [WIDTH-1:0] y_o,
  output logic             sign_o,
  output logic [WIDTH:0]   partial_o,
  output logic [EXP_W-1:0] shift_o,
  output logic             partial_sign_o
);

  logic [WIDTH-1:0] small_v, large_v;
  logic             go;
  logic [WIDTH-1:0] msb_base;
  logic [IDX_W-1:0] msb_exp;
  logic             nonzero;
  logic             round_up;
  logic [WIDTH:0]   base;
  logic signed [WIDTH+1:0] dx, dy;
  logic             dx_neg, dy_neg, diff_sign, next_sign;

  // Step 1: the smaller multiplicand chooses the base.
  always_comb begin
    if (x_i <= y_i) begin
      small_v = x_i;
      large_v = y_i;
    end else begin
      small_v = y_i;
      large_v = x_i;
    end
  end

  // Step 2: recursion ends once the smaller multiplicand is 0 or 1.
  assign go = active_i && (small_v > WIDTH'(1));

  // Step 3: base = MSB power of X, doubled when the second MSB of X is 1.
  base_calculator #(.WIDTH(WIDTH)) u_base (
    .en      (go),
    .operand (small_v),
    .base    (msb_base),
    .exponent(msb_exp),
    .nonzero (nonzero)
  );

  // A multiplicand above 1 always has a base.
  always_comb if (go) a_has_base: assert (nonzero);

  assign round_up = |(small_v & (msb_base >> 1));
  assign base     = round_up ? {msb_base, 1'b0} : {1'b0, msb_base};

  // Step 4: differences from the base.
  assign dx     = $signed({2'b00, small_v}) - $signed({1'b0, base});
  assign dy     = $signed({2'b00, large_v}) - $signed({1'b0, base});
  assign dx_neg = dx[WIDTH+1];
  assign dy_neg = dy[WIDTH+1];

  // Sign of X' * Y', then of the whole remaining product.
  sign_unit u_diff_sign (.sign_a(dx_neg), .sign_b(dy_neg), .sign_p(diff_sign));
  sign_unit u_next_sign (.sign_a(sign_i), .sign_b(diff_sign), .sign_p(next_sign));

  // Steps 5 and 6.
  // |X'| and |Y'| fit in WIDTH bits: X <= Y < 2**WIDTH and B <= 2*X.
  logic [WIDTH-1:0] ax, ay;
  assign ax = dx_neg ? WIDTH'(-dx) : WIDTH'(dx);
  assign ay = dy_neg ? WIDTH'(-dy) : WIDTH'(dy);

  always_comb begin
    if (go) begin
      active_o       = 1'b1;
      x_o            = ax;
      y_o            = ay;
      sign_o         = next_sign;
      // X + Y' = X + Y - B, which is never negative.
      partial_o      = (WIDTH+1)'({2'b00, small_v} + {2'b00, large_v} - {1'b0, base});
      shift_o        = EXP_W'(msb_exp) + EXP_W'(round_up);
      partial_sign_o = sign_i;
    end else begin
      active_o       = 1'b0;
      x_o            = x_i;
      y_o            = y_i;
      sign_o         = sign_i;
      partial_o      = '0;
      shift_o        = '0;
      partial_sign_o = 1'b0;
    end
  end

endmodule
