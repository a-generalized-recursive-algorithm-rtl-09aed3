// vedic_multiplier -- recursive Nikhilam multiplier (top level).
//
// Multiplies two WIDTH-bit operands x1, x2 by the recursive Nikhilam rule
//     X * Y = (X + (Y - B)) * B + (X - B) * (Y - B),   B a power of two,
// applied again to the product of the differences until one difference is
// 0 or 1. The hardware is the chain the algorithm unrolls into:
//   - STAGES = ceil(WIDTH/2) recursion_stage blocks, each with its own base
//     calculator (priority encoder + decoder), subtractors and adder;
//   - a final_product block for the last, trivial multiplication;
//   - a result_accumulator that adds every partial result shifted by its
//     base and registers the product.
// Each stage's base calculator is enabled only while the recursion is still
// running, so a multiplication with few recursions leaves the later stages
// idle; recursions reports how many stages did work.
//
// Modes. With signed_mode = 0 the operands are unsigned and product is
// their 2*WIDTH-bit product. With signed_mode = 1 each operand is in sign-
// magnitude form: bit WIDTH-1 is the sign (1 = negative) and the rest the
// magnitude. The signs are EX-ORed and the magnitudes multiplied; product
// then holds the sign in bit 2*WIDTH-1 and the magnitude below it. A zero
// product keeps the EX-OR of the signs, so -0 can appear.
//
// Timing. Operands and mode are sampled on the rising clock edge at which
// in_valid is high; product, recursions and out_valid follow one cycle
// later. One multiplication can start every cycle. Synchronous active-low
// reset.
//
// The algorithm, the chain structure, the base calculator and the EX-OR sign
// rule are the paper's. The chain length, the single-cycle chain with one
// output register, the valid handshake and the sign-magnitude port format
// are this design's choices.
module vedic_multiplier
  import vedic_pkg::*;
#(
  parameter int unsigned WIDTH = 8,
  localparam int unsigned STAGES = num_stages(WIDTH),
  localparam int unsigned EXP_W  = exp_bits(WIDTH),
  localparam int unsigned CNT_W  = count_bits(STAGES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               signed_mode,
  input  logic [WIDTH-1:0]   x1,
  input  logic [WIDTH-1:0]   x2,
  output logic               out_valid,
  output logic [2*WIDTH-1:0] product,
  output logic [CNT_W-1:0]   recursions
);

  // Operand magnitudes and the sign of the result.
  logic [WIDTH-1:0] mag1, mag2;
  logic             result_sign;

  always_comb begin
    mag1 = x1;
    mag2 = x2;
    if (signed_mode) begin
      mag1[WIDTH-1] = 1'b0;
      mag2[WIDTH-1] = 1'b0;
    end
  end

  sign_unit u_operand_sign (
    .sign_a(signed_mode & x1[WIDTH-1]),
    .sign_b(signed_mode & x2[WIDTH-1]),
    .sign_p(result_sign)
  );

  // The chain of recursions. Index 0 is the input of the first stage.
  logic             act   [STAGES+1];
  logic [WIDTH-1:0] xs    [STAGES+1];
  logic [WIDTH-1:0] ys    [STAGES+1];
  logic             sg    [STAGES+1];
  logic             did   [STAGES];
  logic [WIDTH:0]   part  [STAGES];
  logic [EXP_W-1:0] shift [STAGES];
  logic             psign [STAGES];

  assign act[0] = 1'b1;
  assign xs[0]  = mag1;
  assign ys[0]  = mag2;
  assign sg[0]  = 1'b0;

  for (genvar k = 0; k < STAGES; k++) begin : g_stage
    recursion_stage #(.WIDTH(WIDTH)) u_stage (
      .active_i      (act[k]),
      .x_i           (xs[k]),
      .y_i           (ys[k]),
      .sign_i        (sg[k]),
      .active_o      (did[k]),
      .x_o           (xs[k+1]),
      .y_o           (ys[k+1]),
      .sign_o        (sg[k+1]),
      .partial_o     (part[k]),
      .shift_o       (shift[k]),
      .partial_sign_o(psign[k])
    );
    assign act[k+1] = did[k];
  end

  logic [WIDTH-1:0] fin;
  logic             fin_sign;
  logic             fin_ok;

  final_product #(.WIDTH(WIDTH)) u_final (
    .x_i         (xs[STAGES]),
    .y_i         (ys[STAGES]),
    .sign_i      (sg[STAGES]),
    .value_o     (fin),
    .value_sign_o(fin_sign),
    .ok_o        (fin_ok)
  );

  logic [2*WIDTH-1:0] magnitude;

  result_accumulator #(.WIDTH(WIDTH), .STAGES(STAGES)) u_acc (
    .clk           (clk),
    .rst_n         (rst_n),
    .valid_i       (in_valid),
    .partial_i     (part),
    .shift_i       (shift),
    .partial_sign_i(psign),
    .final_i       (fin),
    .final_sign_i  (fin_sign),
    .valid_o       (out_valid),
    .product_o     (magnitude)
  );

  // Number of stages that did a recursion.
  logic [CNT_W-1:0] count;
  always_comb begin
    count = '0;
    for (int unsigned k = 0; k < STAGES; k++) count = count + CNT_W'(did[k]);
  end

  logic sign_q, mode_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sign_q     <= 1'b0;
      mode_q     <= 1'b0;
      recursions <= '0;
    end else if (in_valid) begin
      sign_q     <= result_sign;
      mode_q     <= signed_mode;
      recursions <= count;
    end
  end

  always_comb begin
    product = magnitude;
    if (mode_q) product[2*WIDTH-1] = sign_q;
  end

  // ceil(WIDTH/2) stages always bring the recursion to its end.
  a_chain_long_enough: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> fin_ok);

endmodule
