// result_accumulator -- merges the partial results into the product.
//
// Stage k of the recursion delivers a partial result P_k that weighs
// B_k = 2**shift_i[k]; the last stage delivers the product of the final
// differences, F. The product is
//     sum_k (+/-) P_k * B_k  (+/-) F
// with each term's sign given by its sign input (1 = subtract). Shifting P_k
// by shift_i[k] is the paper's "the respective b bits of the partial result
// are considered while the other MSBs are carries": the low bits of a partial
// result land in the product directly and its upper bits add, as carries,
// into the next higher result. Stages that did no recursion deliver 0.
//
// The sum is formed combinationally and registered: product_o and valid_o
// appear one clock cycle after valid_i, and a new operand set can be taken
// every cycle. Synchronous, active-low reset clears valid_o and product_o.
// The merge rule is the paper's (steps 8 and 9); the single adder tree and
// the register are this design's choice.
module result_accumulator
  import vedic_pkg::*;
#(
  parameter int unsigned WIDTH  = 8,
  parameter int unsigned STAGES = num_stages(WIDTH),
  localparam int unsigned EXP_W = exp_bits(WIDTH),
  localparam int unsigned ACC_W = 2 * WIDTH + 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid_i,
  input  logic [WIDTH:0]     partial_i      [STAGES],
  input  logic [EXP_W-1:0]   shift_i        [STAGES],
  input  logic               partial_sign_i [STAGES],
  input  logic [WIDTH-1:0]   final_i,
  input  logic               final_sign_i,
  output logic               valid_o,
  output logic [2*WIDTH-1:0] product_o
);

  logic signed [ACC_W-1:0] sum;

  always_comb begin
    logic signed [ACC_W-1:0] term;
    term = $signed(ACC_W'(final_i));
    sum  = final_sign_i ? -term : term;
    for (int unsigned k = 0; k < STAGES; k++) begin
      term = $signed(ACC_W'(partial_i[k]) << shift_i[k]);
      sum  = partial_sign_i[k] ? (sum - term) : (sum + term);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_o   <= 1'b0;
      product_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) product_o <= sum[2*WIDTH-1:0];
    end
  end

  // The product of two WIDTH-bit magnitudes is never negative and fits in
  // 2*WIDTH bits; anything else means the partial results were wrong.
  a_sum_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    valid_i |-> (sum >= 0) && (sum < (ACC_W'(1) << (2 * WIDTH))));

endmodule
