// tb_multiplier_stage: random TLB bits on all K multiplier inputs with
// random main-clock ticks. After a tick the hold registers must contain the
// product sign/magnitude of every pair (value p_h[k] - n_h[k] = x_k * y_k);
// without a tick they must keep their contents.
module tb_multiplier_stage;
  import sc_pkg::*;
  localparam int K = 5;
  logic clk = 0, rst_n = 0, clear = 0, main_tick = 0;
  tlb_bit_t x [K];
  tlb_bit_t y [K];
  logic [K-1:0] ph, nh, ph_exp, nh_exp;
  int checks = 0, failures = 0;

  multiplier_stage #(.K(K)) dut (.clk, .rst_n, .clear, .main_tick, .x, .y, .ph, .nh);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < K; k++) begin x[k] = '0; y[k] = '0; end
    ph_exp = '0; nh_exp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      main_tick = ($urandom_range(0, 2) == 0);
      clear = ($urandom_range(0, 99) == 0);
      for (int k = 0; k < K; k++) begin
        x[k] = tlb_bit_t'($urandom_range(0, 3));
        y[k] = tlb_bit_t'($urandom_range(0, 3));
      end
      if (clear) begin
        ph_exp = '0; nh_exp = '0;
      end else if (main_tick) begin
        for (int k = 0; k < K; k++) begin
          automatic int v = (int'(x[k].p) - int'(x[k].n)) * (int'(y[k].p) - int'(y[k].n));
          ph_exp[k] = (v == 1);
          nh_exp[k] = (v == -1);
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (ph !== ph_exp || nh !== nh_exp) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d ph=%b/%b nh=%b/%b", t, ph, ph_exp, nh, nh_exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
