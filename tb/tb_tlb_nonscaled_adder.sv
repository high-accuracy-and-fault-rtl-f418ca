// tb_tlb_nonscaled_adder: random TLB streams into the two-input non-scaled
// adder. A reference keeps the stored carry as a signed integer count c
// (positive: p_c holds c ones, negative: n_c holds -c ones, saturating at
// +-M) and applies the adder's case table per bit. Every output bit is
// compared, and so is the overflow flag. Overflow is provoked on purpose by
// a section with mostly +2 / -2 inputs.
module tb_tlb_nonscaled_adder;
  import sc_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst_n = 0, en = 0;
  tlb_bit_t x, y, z;
  logic overflow;
  int checks = 0, failures = 0;
  int c = 0, n_ovf = 0, n_cancel = 0;

  tlb_nonscaled_adder #(.M(M)) dut (.clk, .rst_n, .en, .x, .y, .z, .overflow);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tlb_bit_t rand_bit(int mode);
    // mode 0: uniform over the four pairs; 1: mostly +1; 2: mostly -1
    int r = $urandom_range(0, 99);
    if (mode == 1) return (r < 80) ? tlb_bit_t'(2'b10) : tlb_bit_t'($urandom_range(0, 3));
    if (mode == 2) return (r < 80) ? tlb_bit_t'(2'b01) : tlb_bit_t'($urandom_range(0, 3));
    return tlb_bit_t'($urandom_range(0, 3));
  endfunction

  initial begin
    x = '0; y = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      int s, zexp, mode;
      bit ovf_exp;
      mode = (t >= 1000 && t < 1300) ? 1 : (t >= 3000 && t < 3300) ? 2 : 0;
      @(negedge clk);
      en = ($urandom_range(0, 9) != 0);
      x = rand_bit(mode);
      y = rand_bit(mode);
      #1;
      s = (int'(x.p) - int'(x.n)) + (int'(y.p) - int'(y.n));
      ovf_exp = 0;
      case (s)
        0:  zexp = (c > 0) ? 1 : (c < 0) ? -1 : 0;
        1:  zexp = (c < 0) ? 0 : 1;
        -1: zexp = (c > 0) ? 0 : -1;
        2:  zexp = 1;
        default: zexp = -1;
      endcase
      checks++;
      if ((int'(z.p) - int'(z.n)) != zexp || (z.p && z.n)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d s=%0d c=%0d z=(%0b,%0b) exp=%0d", t, s, c, z.p, z.n, zexp);
      end
      if (en) begin
        // carry update of the reference
        case (s)
          0:  c = (c > 0) ? c - 1 : (c < 0) ? c + 1 : 0;
          1:  if (c < 0) c++;
          -1: if (c > 0) c--;
          2:  begin
                if (c < 0) begin c++; n_cancel++; end
                else if (c == M) ovf_exp = 1;
                else c++;
              end
          default: begin
                if (c > 0) begin c--; n_cancel++; end
                else if (c == -M) ovf_exp = 1;
                else c--;
              end
        endcase
      end
      checks++;
      if (overflow !== (en && ovf_exp)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d overflow=%0b exp=%0b", t, overflow, ovf_exp);
      end
      if (en && ovf_exp) n_ovf++;
      @(posedge clk);
    end
    checks++;
    if (n_ovf == 0 || n_cancel == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: overflows=%0d cancels=%0d", n_ovf, n_cancel);
    end
    $display("overflows=%0d cancels=%0d", n_ovf, n_cancel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
