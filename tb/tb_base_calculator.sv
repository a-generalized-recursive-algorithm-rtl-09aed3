// tb_base_calculator -- exhaustive check of the base calculator.
// For every 8-bit operand the base must be the largest power of two not above
// it (found here by repeated doubling), the exponent its log2, and with the
// enable low the base must be 0. Includes the example 00110110 -> 00100000.
module tb_base_calculator;
  localparam int unsigned W = 8;
  logic         en;
  logic [W-1:0] operand, base;
  logic [2:0]   exponent;
  logic         nonzero;
  int checks = 0, failures = 0;

  base_calculator #(.WIDTH(W)) dut (.en, .operand, .base, .exponent, .nonzero);

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
        int p, lg;
        p = 0; lg = 0;
        if (v > 0) begin
          p = 1;
          while (p * 2 <= v) begin p = p * 2; lg++; end
        end
        if (e == 0) begin p = 0; lg = 0; end
        en = e[0];
        operand = W'(v);
        #1;
        checks++;
        if (base !== W'(p) || exponent !== 3'(lg) || nonzero !== (e == 1 && v != 0)) begin
          failures++;
          if (failures < 10) $display("FAIL en=%0d op=%0d base=%0d exp=%0d want %0d %0d", e, v, base, exponent, p, lg);
        end
      end
    end
    en = 1; operand = 8'b0011_0110; #1;
    checks++;
    if (base !== 8'b0010_0000) begin failures++; $display("FAIL paper example %b", base); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
