// tb_tlb_to_sm: exhaustive test of the TLB -> SM bit converter. For all four
// TLB pairs the SM value (1-2s)*m must equal p - n, and for +1/-1 the exact
// bits of the conversion table are checked.
module tb_tlb_to_sm;
  import sc_pkg::*;
  tlb_bit_t x;
  sm_bit_t  y;
  int checks = 0, failures = 0;

  tlb_to_sm dut (.x(x), .y(y));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      int tv, sv;
      x = tlb_bit_t'(i);
      #1;
      tv = int'(x.p) - int'(x.n);
      sv = (1 - 2 * int'(y.s)) * int'(y.m);
      checks++;
      if (tv != sv) begin
        failures++;
        $display("FAIL p=%0b n=%0b -> s=%0b m=%0b", x.p, x.n, y.s, y.m);
      end
      if (tv == -1) begin checks++; if (!(y.s && y.m)) failures++; end
      if (tv ==  1) begin checks++; if (!(!y.s && y.m)) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
