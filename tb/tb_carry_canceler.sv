// tb_carry_canceler: exhaustive test of the carry canceler: outputs follow
// the inputs unless both are one, then both are zero.
module tb_carry_canceler;
  logic a_i, b_i, a_o, b_o;
  int checks = 0, failures = 0;

  carry_canceler dut (.a_i, .b_i, .a_o, .b_o);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      logic ea, eb;
      {a_i, b_i} = 2'(i);
      #1;
      if (a_i && b_i) begin ea = 0; eb = 0; end
      else begin ea = a_i; eb = b_i; end
      checks++;
      if (a_o !== ea || b_o !== eb) begin
        failures++;
        $display("FAIL in=%0b%0b out=%0b%0b", a_i, b_i, a_o, b_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
