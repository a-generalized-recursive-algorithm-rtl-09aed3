// tb_vedic_multiplier_wide -- the same multiplier built for 16-bit operands
// (eight recursion stages), to exercise the width-generic algorithm.
// Random operands, with a bias towards the hard cases (many alternating
// ones, powers of two and their neighbours, equal operands), are multiplied
// in both modes and compared with integer products one cycle later. The
// built-in assertion that the chain always ends the recursion is active
// throughout. Also checks that some operand needs all eight recursions.
module tb_vedic_multiplier_wide;
  localparam int unsigned W = 16;
  localparam int unsigned N = 200000;

  logic           clk = 1'b0, rst_n, in_valid, signed_mode;
  logic [W-1:0]   x1, x2;
  logic           out_valid;
  logic [2*W-1:0] product;
  logic [3:0]     recursions;
  int checks = 0, failures = 0;
  int max_rec = 0;

  vedic_multiplier #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] pick();
    case ($urandom_range(0, 4))
      0: return W'($urandom);
      1: return W'(16'h5555 >> $urandom_range(0, 14)) ^ W'($urandom_range(0, 3));
      2: return (W'(1) << $urandom_range(0, W - 1)) + W'($urandom_range(0, 2)) - W'(1);
      3: return W'(16'hAAAA >> $urandom_range(0, 14));
      default: return W'($urandom_range(0, 300));
    endcase
  endfunction

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    signed_mode = 1'b0;
    x1 = '0;
    x2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      logic [2*W-1:0] expect_v;
      longint a, b;
      in_valid    = 1'b1;
      signed_mode = 1'($urandom_range(0, 1));
      x1 = pick();
      x2 = ($urandom_range(0, 7) == 0) ? x1 : pick();
      if (!signed_mode) begin
        expect_v = (2*W)'(longint'(x1) * longint'(x2));
      end else begin
        a = longint'(x1[W-2:0]);
        b = longint'(x2[W-2:0]);
        expect_v = (2*W)'(a * b);
        expect_v[2*W-1] = x1[W-1] ^ x2[W-1];
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || product !== expect_v) begin
        failures++;
        if (failures < 10) $display("FAIL mode %0d: %0d x %0d = %0d, expected %0d", signed_mode, x1, x2, product, expect_v);
      end
      if (int'(recursions) > max_rec) max_rec = int'(recursions);
    end
    $display("most recursions seen: %0d", max_rec);
    checks++;
    if (max_rec != 8) begin failures++; $display("FAIL the 8-stage worst case never occurred"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
