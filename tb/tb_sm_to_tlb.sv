// tb_sm_to_tlb: exhaustive test of the SM -> TLB bit converter against the
// conversion table: -1 -> (0,1), +1 -> (1,0), zero magnitude -> a pair of
// equal lines.
module tb_sm_to_tlb;
  import sc_pkg::*;
  sm_bit_t  x;
  tlb_bit_t y;
  int checks = 0, failures = 0;

  sm_to_tlb dut (.x(x), .y(y));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      x = sm_bit_t'(i);
      #1;
      checks++;
      if (!x.m) begin
        if (y.p != y.n) begin failures++; $display("FAIL zero s=%0b", x.s); end
      end else if (x.s) begin
        if (!(y.p == 1'b0 && y.n == 1'b1)) begin failures++; $display("FAIL -1"); end
      end else begin
        if (!(y.p == 1'b1 && y.n == 1'b0)) begin failures++; $display("FAIL +1"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
