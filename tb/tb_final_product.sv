// tb_final_product -- the last multiplication, where one factor is 0 or 1.
// Every pair with one factor in {0,1} is compared with the plain product;
// ok_o is checked for every pair.
module tb_final_product;
  localparam int unsigned W = 8;
  logic [W-1:0] x_i, y_i, value_o;
  logic         sign_i, value_sign_o, ok_o;
  int checks = 0, failures = 0;

  final_product #(.WIDTH(W)) dut (.x_i, .y_i, .sign_i, .value_o, .value_sign_o, .ok_o);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < (1 << W); x++) begin
      for (int y = 0; y < (1 << W); y++) begin
        bit trivial;
        trivial = (x <= 1) || (y <= 1);
        x_i = W'(x);
        y_i = W'(y);
        sign_i = 1'((x + y) & 1);
        #1;
        checks++;
        if (ok_o !== trivial) begin
          failures++;
          if (failures < 10) $display("FAIL ok x=%0d y=%0d", x, y);
        end
        if (trivial) begin
          checks++;
          if (int'(value_o) != x * y || value_sign_o !== sign_i) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d y=%0d value=%0d", x, y, value_o);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
