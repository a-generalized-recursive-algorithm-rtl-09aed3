// tb_recursion_stats -- recursion statistics of the multiplier against the
// published counts.
//
// The number of recursions depends on the smaller multiplicand n. It is
// measured here on the hardware for n = 0..127 by squaring n (so both
// operands follow the same path). For each bit length b = 1..7 the testbench
// finds the worst-case number of recursions and f(b), how many n of b bits
// reach it, and checks:
//   - the worst case is ceil(b/2) recursions;
//   - f(3) = 1, f(4) = 5, and f(b) = 2 f(b-2) for odd b > 3,
//     f(b) = 2 f(b-2) + f(b-1) for even b > 4;
//   - for b = 1 and 2, where the published f is 0, no n needs more than one
//     decomposition, i.e. nothing is left over to recurse on.
module tb_recursion_stats;
  localparam int unsigned W = 8;
  localparam int unsigned NMAX = 128;

  logic           clk = 1'b0, rst_n, in_valid, signed_mode;
  logic [W-1:0]   x1, x2;
  logic           out_valid;
  logic [2*W-1:0] product;
  logic [2:0]     recursions;
  int checks = 0, failures = 0;
  int rec [NMAX];

  vedic_multiplier dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int worst [8];
    int f [8];
    int fref [8];
    rst_n = 1'b0;
    in_valid = 1'b0;
    signed_mode = 1'b0;
    x1 = '0;
    x2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NMAX; n++) begin
      in_valid = 1'b1;
      x1 = W'(n);
      x2 = W'(n);
      @(posedge clk);
      #1;
      rec[n] = int'(recursions);
      checks++;
      if (!out_valid || int'(product) != n * n) begin
        failures++; $display("FAIL %0d squared = %0d", n, product);
      end
    end
    in_valid = 1'b0;

    // Worst case and its count for each bit length.
    for (int b = 1; b <= 7; b++) begin
      int lo, hi;
      lo = (b == 1) ? 0 : (1 << (b - 1));
      hi = (1 << b) - 1;
      worst[b] = 0;
      f[b] = 0;
      for (int n = lo; n <= hi; n++) if (rec[n] > worst[b]) worst[b] = rec[n];
      for (int n = lo; n <= hi; n++) if (rec[n] == worst[b]) f[b]++;
      if (worst[b] <= 1) f[b] = 0;
    end

    // Published initial values and recurrence.
    fref[1] = 0; fref[2] = 0; fref[3] = 1; fref[4] = 5;
    for (int b = 5; b <= 7; b++)
      fref[b] = (b % 2 == 1) ? 2 * fref[b-2] : 2 * fref[b-2] + fref[b-1];

    for (int b = 1; b <= 7; b++) begin
      $display("b=%0d  worst case %0d recursions  f(b)=%0d  published %0d", b, worst[b], f[b], fref[b]);
      checks++;
      if (worst[b] != (b + 1) / 2 && !(b == 1 && worst[b] == 0)) begin
        failures++; $display("FAIL worst case for b=%0d is %0d", b, worst[b]);
      end
      checks++;
      if (f[b] != fref[b]) begin
        failures++; $display("FAIL f(%0d) = %0d, published %0d", b, f[b], fref[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
