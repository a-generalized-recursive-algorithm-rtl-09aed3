// tb_recursion_stage -- exhaustive check of one recursion step.
// For every pair of 8-bit magnitudes (and both input signs) the stage is
// compared with integer arithmetic: X = min, Y = max, B = the power of two
// nearest to X (ties upward), differences X - B and Y - B, partial result
// X + Y - B weighted by B. The identity X*Y = (X+Y-B)*B + (X-B)*(Y-B) is
// checked on the stage's own outputs. A stage whose active_i is low, or whose
// smaller input is 0 or 1, must pass its inputs through and do nothing.
// The paper's example 23 x 21 gives base 16 and partial result 11100.
module tb_recursion_stage;
  localparam int unsigned W = 8;
  logic         active_i, sign_i;
  logic [W-1:0] x_i, y_i;
  logic         active_o, sign_o, partial_sign_o;
  logic [W-1:0] x_o, y_o;
  logic [W:0]   partial_o;
  logic [3:0]   shift_o;
  int checks = 0, failures = 0;

  recursion_stage #(.WIDTH(W)) dut (.*);

  task automatic fail(input string what, input int x, input int y);
    failures++;
    if (failures < 12) $display("FAIL %s x=%0d y=%0d", what, x, y);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) begin
      for (int x = 0; x < (1 << W); x++) begin
        for (int y = 0; y < (1 << W); y++) begin
          int sx, sy, p, bb, lg, dx, dy, prod_in, prod_out;
          active_i = 1'b1;
          sign_i   = s[0];
          x_i      = W'(x);
          y_i      = W'(y);
          #1;
          sx = (x < y) ? x : y;
          sy = (x < y) ? y : x;
          checks++;
          if (sx <= 1) begin
            if (active_o !== 1'b0 || x_o !== x_i || y_o !== y_i || sign_o !== sign_i || partial_o !== '0)
              fail("no-recursion pass-through", x, y);
            continue;
          end
          p = 1; lg = 0;
          while (p * 2 <= sx) begin p = p * 2; lg++; end
          bb = p;
          if (2 * sx >= 3 * p) begin bb = 2 * p; lg++; end
          dx = sx - bb;
          dy = sy - bb;
          if (active_o !== 1'b1) fail("active", x, y);
          if (int'(partial_o) != sx + sy - bb) fail("partial", x, y);
          if (int'(shift_o) != lg) fail("shift", x, y);
          if (partial_sign_o !== sign_i) fail("partial sign", x, y);
          if ({int'(x_o), int'(y_o)} != {(dx < 0) ? -dx : dx, (dy < 0) ? -dy : dy} &&
              {int'(y_o), int'(x_o)} != {(dx < 0) ? -dx : dx, (dy < 0) ? -dy : dy})
            fail("differences", x, y);
          // The sign of a zero product of differences is free.
          if (dx * dy != 0 && sign_o !== (sign_i ^ ((dx * dy) < 0))) fail("sign", x, y);
          // Identity on the stage's own outputs.
          prod_in  = x * y;
          prod_out = int'(partial_o) * (1 << shift_o)
                   + ((sign_o ^ sign_i) ? -1 : 1) * int'(x_o) * int'(y_o);
          checks++;
          if (prod_in != prod_out) fail("identity", x, y);
        end
      end
    end
    // Disabled stage passes through.
    active_i = 1'b0; sign_i = 1'b1; x_i = 8'd100; y_i = 8'd200; #1;
    checks++;
    if (active_o !== 1'b0 || x_o !== 8'd100 || y_o !== 8'd200 || sign_o !== 1'b1 || partial_o !== '0)
      fail("disabled stage", 100, 200);
    // Paper example: 23 x 21, base 16, partial 10111 + 101 = 11100.
    active_i = 1'b1; sign_i = 1'b0; x_i = 8'd23; y_i = 8'd21; #1;
    checks++;
    if (partial_o !== 9'b0_0001_1100 || shift_o !== 4'd4 || x_o !== 8'd5 || y_o !== 8'd7)
      fail("23 x 21 example", 23, 21);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
