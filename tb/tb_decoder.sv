// tb_decoder -- exhaustive check of the 3-to-8 decoder: each index, with the
// enable high and low, against 1 << idx (or 0 when disabled).
module tb_decoder;
  localparam int unsigned W = 8;
  logic         en;
  logic [2:0]   idx;
  logic [W-1:0] onehot;
  int checks = 0, failures = 0;

  decoder #(.WIDTH(W)) dut (.en, .idx, .onehot);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int i = 0; i < W; i++) begin
        logic [W-1:0] expect_v;
        expect_v = (e == 1) ? W'(1) << i : '0;
        en = e[0];
        idx = 3'(i);
        #1;
        checks++;
        if (onehot !== expect_v) begin
          failures++;
          $display("FAIL en=%0d idx=%0d out=%b exp=%b", e, i, onehot, expect_v);
        end
      end
    end
    en = 1; idx = 3'b101; #1;
    checks++;
    if (onehot !== 8'b0010_0000) begin failures++; $display("FAIL paper example %b", onehot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
