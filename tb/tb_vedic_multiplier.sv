// tb_vedic_multiplier -- end-to-end test of the multiplier at its default
// size (WIDTH = 8, four recursion stages).
//
// Every pair of 8-bit operands is multiplied in unsigned mode and again in
// signed (sign-magnitude) mode, back to back, one operation per cycle, with
// an idle cycle now and then. Each result is compared one cycle later with
// the product computed by ordinary integer arithmetic; the reported number of
// recursions is compared with a behavioural model of the recursion. The
// worked example 23 x 21 = 483 (two recursions) and the operands of the
// radix-10 examples are run first.
//
// The testbench counts how often each mechanism of the design occurs and
// counts a failure for any that never does: base rounded up (second MSB 1),
// base not rounded, a negative difference, swapping so that the smaller
// operand picks the base, a zero operand, a one operand, the worst case of
// ceil(WIDTH/2) recursions, signed mode with a negative result, and an idle
// cycle.
module tb_vedic_multiplier;
  localparam int unsigned W = 8;
  localparam int unsigned STAGES = (W + 1) / 2;

  logic           clk = 1'b0, rst_n, in_valid, signed_mode;
  logic [W-1:0]   x1, x2;
  logic           out_valid;
  logic [2*W-1:0] product;
  logic [2:0]     recursions;
  int checks = 0, failures = 0;

  typedef enum int {M_ROUND_UP, M_ROUND_DOWN, M_NEG_DIFF, M_SWAP, M_ZERO, M_ONE,
                    M_WORST, M_SIGNED_NEG, M_IDLE, M_COUNT} mech_e;
  int mech [M_COUNT];

  vedic_multiplier dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Behavioural model of the recursion: number of recursions, and it marks
  // the mechanisms seen.
  function automatic int model_recursions(input int a, input int b);
    int c = 0;
    int x = a, y = b;
    forever begin
      int sx, sy, p, bb;
      sx = (x < y) ? x : y;
      sy = (x < y) ? y : x;
      if (sx <= 1) break;
      if (c == 0 && a > b) mech[M_SWAP]++;
      p = 1;
      while (p * 2 <= sx) p = p * 2;
      if (2 * sx >= 3 * p) begin bb = 2 * p; mech[M_ROUND_UP]++; end
      else begin bb = p; mech[M_ROUND_DOWN]++; end
      if (sx - bb < 0 || sy - bb < 0) mech[M_NEG_DIFF]++;
      x = (sx >= bb) ? sx - bb : bb - sx;
      y = (sy >= bb) ? sy - bb : bb - sy;
      c++;
    end
    return c;
  endfunction

  // Expected output for one operation.
  typedef struct {
    logic [2*W-1:0] product;
    int             recursions;
  } expect_t;

  function automatic expect_t model(input int a, input int b, input bit sm);
    expect_t e;
    if (!sm) begin
      e.product    = (2*W)'(a * b);
      e.recursions = model_recursions(a, b);
    end else begin
      int ma, mb;
      bit sa, sb;
      sa = a[W-1]; sb = b[W-1];
      ma = a & ((1 << (W - 1)) - 1);
      mb = b & ((1 << (W - 1)) - 1);
      e.product = (2*W)'(ma * mb);
      e.product[2*W-1] = sa ^ sb;
      e.recursions = model_recursions(ma, mb);
      if ((sa ^ sb) && ma * mb != 0) mech[M_SIGNED_NEG]++;
    end
    if (a == 0 || b == 0) mech[M_ZERO]++;
    if (a == 1 || b == 1) mech[M_ONE]++;
    if (e.recursions == STAGES) mech[M_WORST]++;
    return e;
  endfunction

  expect_t pending;
  bit      pending_valid = 0;

  // Drive one cycle (valid or idle) and check the previous operation.
  task automatic step(input bit v, input int a, input int b, input bit sm);
    in_valid    = v;
    x1          = W'(a);
    x2          = W'(b);
    signed_mode = sm;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== v) begin
      failures++;
      if (failures < 10) $display("FAIL out_valid=%0d expected %0d", out_valid, v);
    end
    if (v) begin
      pending = model(a, b, sm);
      checks++;
      if (product !== pending.product || int'(recursions) != pending.recursions) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s %0d x %0d: product %0d rec %0d, expected %0d rec %0d",
                   sm ? "signed" : "unsigned", a, b, product, recursions,
                   pending.product, pending.recursions);
      end
    end else begin
      mech[M_IDLE]++;
    end
  endtask

  initial begin
    foreach (mech[i]) mech[i] = 0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    signed_mode = 1'b0;
    x1 = '0;
    x2 = '0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0 || product !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;

    // Worked example from the description: 23 x 21 = 111100011 = 483.
    step(1, 23, 21, 0);
    checks++;
    if (product !== 16'd483 || recursions !== 3'd2) begin
      failures++; $display("FAIL 23 x 21 = %0d, %0d recursions", product, recursions);
    end

    // Operands of the radix-10 examples (99 x 98, 102 x 101, 101 x 99,
    // 49 x 48), multiplied here in binary.
    step(1, 99, 98, 0);   checks++; if (product !== 16'd9702)  begin failures++; $display("FAIL 99 x 98"); end
    step(1, 102, 101, 0); checks++; if (product !== 16'd10302) begin failures++; $display("FAIL 102 x 101"); end
    step(1, 101, 99, 0);  checks++; if (product !== 16'd9999)  begin failures++; $display("FAIL 101 x 99"); end
    step(1, 49, 48, 0);   checks++; if (product !== 16'd2352)  begin failures++; $display("FAIL 49 x 48"); end

    for (int sm = 0; sm < 2; sm++) begin
      for (int a = 0; a < (1 << W); a++) begin
        for (int b = 0; b < (1 << W); b++) begin
          if (((a * 7 + b * 3) % 97) == 0) step(0, 0, 0, 0);
          step(1, a, b, sm[0]);
        end
      end
    end

    for (int i = 0; i < M_COUNT; i++) begin
      mech_e m;
      m = mech_e'(i);
      $display("mechanism %-13s seen %0d times", m.name(), mech[i]);
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism %s never occurred", m.name()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
