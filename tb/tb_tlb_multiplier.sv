// tb_tlb_multiplier: exhaustive test of the TLB multiplier. For all 16
// combinations of input pairs the output value must equal the product of
// the input values, and the output must never drive both lines.
module tb_tlb_multiplier;
  import sc_pkg::*;
  tlb_bit_t x, y, z;
  int checks = 0, failures = 0;

  tlb_multiplier dut (.x(x), .y(y), .z(z));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) begin
        int xv, yv, zv;
        x = tlb_bit_t'(i);
        y = tlb_bit_t'(j);
        #1;
        xv = int'(x.p) - int'(x.n);
        yv = int'(y.p) - int'(y.n);
        zv = int'(z.p) - int'(z.n);
        checks++;
        if (zv != xv * yv || (z.p && z.n)) begin
          failures++;
          $display("FAIL x=%0d y=%0d z=(%0b,%0b)", xv, yv, z.p, z.n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
