// tb_priority_encoder -- exhaustive check of the priority encoder.
// Every 8-bit input, enabled and disabled, is compared with the index of the
// highest set bit found by a top-down search. Also checks the worked example
// 00110110 -> 101.
module tb_priority_encoder;
  localparam int unsigned W = 8;
  logic         en;
  logic [W-1:0] in_bits;
  logic [2:0]   idx;
  logic         any;
  int checks = 0, failures = 0;

  priority_encoder #(.WIDTH(W)) dut (.en, .in_bits, .idx, .any);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int v = 0; v < (1 << W); v++) begin
        int exp_idx;
        bit exp_any;
        exp_idx = 0;
        exp_any = 0;
        if (e == 1) begin
          for (int i = W - 1; i >= 0; i--) begin
            if (v[i] && !exp_any) begin
              exp_idx = i;
              exp_any = 1;
            end
          end
        end
        en = e[0];
        in_bits = v[W-1:0];
        #1;
        checks++;
        if (idx !== 3'(exp_idx) || any !== exp_any) begin
          failures++;
          if (failures < 10) $display("FAIL en=%0d in=%b idx=%0d any=%0d exp %0d %0d", e, v[W-1:0], idx, any, exp_idx, exp_any);
        end
      end
    end
    en = 1; in_bits = 8'b0011_0110; #1;
    checks++;
    if (idx !== 3'b101) begin failures++; $display("FAIL paper example idx=%b", idx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
