// tb_sign_unit -- the sign of a product of signed numbers: negative exactly
// when one factor is negative. Checked for all four sign pairs by
// multiplying +/-1 values.
module tb_sign_unit;
  logic sign_a, sign_b, sign_p;
  int checks = 0, failures = 0;

  sign_unit dut (.sign_a, .sign_b, .sign_p);

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2; a++) begin
      for (int b = 0; b < 2; b++) begin
        int va, vb;
        va = (a == 1) ? -1 : 1;
        vb = (b == 1) ? -1 : 1;
        sign_a = a[0];
        sign_b = b[0];
        #1;
        checks++;
        if (sign_p !== (va * vb < 0)) begin
          failures++;
          $display("FAIL a=%0d b=%0d p=%0d", a, b, sign_p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
