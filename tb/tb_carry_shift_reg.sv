// tb_carry_shift_reg: random hold / shift-in / shift-out operations, bit
// flips and clears on an M-bit carry register, compared with a bit-array
// model that applies the shift directions directly (one enters at element
// [1] on a shift in, zero enters at element [M] on a shift out).
module tb_carry_shift_reg;
  import sc_pkg::*;
  localparam int M = 6;
  logic clk = 0, rst_n = 0, clear = 0;
  carry_op_e op;
  logic [M-1:0] flip, q;
  logic overflow;
  bit model [1:M];
  int checks = 0, failures = 0, n_ovf = 0;

  carry_shift_reg #(.M(M)) dut (.clk, .rst_n, .clear, .op, .flip, .q, .overflow);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = CARRY_HOLD; flip = '0;
    for (int i = 1; i <= M; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int r;
      bit exp_ovf;
      @(negedge clk);
      r = $urandom_range(0, 99);
      // bias towards shift in during the first half so the register fills
      if (t < 2000) op = (r < 60) ? CARRY_SHIFT_IN : (r < 85) ? CARRY_SHIFT_OUT : CARRY_HOLD;
      else          op = (r < 35) ? CARRY_SHIFT_IN : (r < 80) ? CARRY_SHIFT_OUT : CARRY_HOLD;
      flip  = ($urandom_range(0, 19) == 0) ? M'(1 << $urandom_range(0, M-1)) : '0;
      clear = ($urandom_range(0, 199) == 0);
      #1;
      exp_ovf = (op == CARRY_SHIFT_IN) && model[M];
      checks++;
      if (overflow !== exp_ovf) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d overflow=%0b exp=%0b", t, overflow, exp_ovf);
      end
      if (exp_ovf) n_ovf++;
      @(posedge clk);
      if (clear) begin
        for (int i = 1; i <= M; i++) model[i] = 0;
      end else begin
        if (op == CARRY_SHIFT_IN) begin
          for (int i = M; i >= 2; i--) model[i] = model[i-1];
          model[1] = 1;
        end else if (op == CARRY_SHIFT_OUT) begin
          for (int i = 1; i <= M-1; i++) model[i] = model[i+1];
          model[M] = 0;
        end
        for (int i = 1; i <= M; i++) model[i] ^= flip[i-1];
      end
      #1;
      checks++;
      for (int i = 1; i <= M; i++) begin
        if (q[i-1] !== model[i]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d element %0d", t, i);
          break;
        end
      end
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL no overflow exercised"); end
    $display("overflows=%0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
