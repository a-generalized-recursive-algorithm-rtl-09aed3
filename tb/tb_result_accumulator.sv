// tb_result_accumulator -- merging of weighted partial results.
// Random partial results, shifts and signs are summed by integer arithmetic
// and compared with the registered product one cycle later; the 23 x 21
// example (11100 << 4, 1000 << 2, final 11) must give 111100011 = 483.
// Checks the one-cycle latency with valid_i gaps and the reset value.
module tb_result_accumulator;
  localparam int unsigned W = 8;
  localparam int unsigned S = 4;
  logic            clk = 1'b0, rst_n, valid_i, valid_o;
  logic [W:0]      partial_i [S];
  logic [3:0]      shift_i [S];
  logic            partial_sign_i [S];
  logic [W-1:0]    final_i;
  logic            final_sign_i;
  logic [2*W-1:0]  product_o;
  int checks = 0, failures = 0;

  result_accumulator #(.WIDTH(W), .STAGES(S)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expected, prev;
    bit     prev_valid;
    rst_n = 1'b0;
    valid_i = 1'b0;
    final_i = '0;
    final_sign_i = 1'b0;
    for (int k = 0; k < S; k++) begin
      partial_i[k] = '0; shift_i[k] = '0; partial_sign_i[k] = 1'b0;
    end
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (valid_o !== 1'b0 || product_o !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;

    // Paper example 23 x 21.
    partial_i[0] = 9'd28; shift_i[0] = 4'd4;
    partial_i[1] = 9'd8;  shift_i[1] = 4'd2;
    final_i = 8'd3;
    valid_i = 1'b1;
    @(posedge clk); #1;
    valid_i = 1'b0;
    checks++;
    if (valid_o !== 1'b1 || product_o !== 16'b1_1110_0011) begin
      failures++; $display("FAIL example: %0d", product_o);
    end

    prev_valid = 0;
    prev = 0;
    for (int n = 0; n < 20000; n++) begin
      bit v;
      v = ($urandom_range(0, 3) != 0);
      expected = 0;
      for (int k = 0; k < S; k++) begin
        partial_i[k] = (W+1)'($urandom_range(0, (1 << (W - 1)) - 1));
        shift_i[k]   = 4'($urandom_range(0, W - 2));
        partial_sign_i[k] = 1'($urandom_range(0, 1));
      end
      final_i = W'($urandom);
      final_sign_i = 1'($urandom_range(0, 1));
      expected = final_sign_i ? -longint'(final_i) : longint'(final_i);
      for (int k = 0; k < S; k++)
        expected += (partial_sign_i[k] ? -1 : 1) * (longint'(partial_i[k]) << shift_i[k]);
      if (expected < 0) begin
        // keep the sum a valid (non-negative) product: flip every sign
        final_sign_i = ~final_sign_i;
        for (int k = 0; k < S; k++) partial_sign_i[k] = ~partial_sign_i[k];
        expected = -expected;
      end
      valid_i = v;
      @(posedge clk); #1;
      checks++;
      if (valid_o !== v) begin failures++; $display("FAIL valid latency at %0d", n); end
      if (v) begin
        checks++;
        if (longint'(product_o) != expected) begin
          failures++;
          if (failures < 10) $display("FAIL sum %0d want %0d", product_o, expected);
        end
        prev = expected;
      end else begin
        checks++;
        if (prev_valid && longint'(product_o) != prev) begin
          failures++; $display("FAIL product changed without valid_i");
        end
      end
      prev_valid = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
