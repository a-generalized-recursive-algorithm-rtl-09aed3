// decoder -- binary index to one-hot word.
//
// Second half of the base calculator. It takes the encoder's A0..A2 and
// drives the single output line B[idx] high, so that 101 becomes 00100000,
// the base. With en low every output is 0.
//
// Purely combinational. The block and its enable follow the paper's
// base-calculator drawing; the all-zero output when disabled is this
// design's choice.
module decoder #(
  parameter int unsigned WIDTH = 8,
  localparam int unsigned IDX_W = (WIDTH < 2) ? 1 : $clog2(WIDTH)
) (
  input  logic             en,
  input  logic [IDX_W-1:0] idx,
  output logic [WIDTH-1:0] onehot
);

  always_comb begin
    onehot = '0;
    if (en && (32'(idx) < WIDTH)) onehot[idx] = 1'b1;
  end

endmodule
