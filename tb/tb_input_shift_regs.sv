// tb_input_shift_regs: loads random hold-register contents and drains them
// with K shifts. A 1-based array model applies the load mapping
// (p_h[k] -> p_s[k], n_h[k] -> n_s[K-k+1]) and the canceler equations
// literally; p_s[1], n_s[1] are compared after every load and shift. A
// second, model-free check: over one load-and-drain, the sum of
// p_s[1] - n_s[1] seen by the accumulator equals the sum of p_h - n_h,
// because cancelling removes a +1 and a -1 together.
module tb_input_shift_regs;
  localparam int K = 8;
  logic clk = 0, rst_n = 0, clear = 0, load = 0, shift = 0;
  logic [K-1:0] ph, nh;
  logic ps1, ns1;
  bit mp [1:K+1];
  bit mn [1:K+1];
  int checks = 0, failures = 0, n_cancel = 0;

  input_shift_regs #(.K(K)) dut (.clk, .rst_n, .clear, .load, .shift, .ph, .nh, .ps1, .ns1);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(int t);
    checks++;
    if (ps1 !== mp[1] || ns1 !== mn[1]) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0d ps1=%0b/%0b ns1=%0b/%0b", t, ps1, mp[1], ns1, mn[1]);
    end
  endtask

  initial begin
    ph = '0; nh = '0;
    for (int i = 1; i <= K + 1; i++) begin mp[i] = 0; mn[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int sum_in, sum_out;
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        automatic int v = $urandom_range(0, 2);  // product bit: 0, +1 or -1
        ph[k] = (v == 1);
        nh[k] = (v == 2);
      end
      sum_in = 0;
      for (int k = 0; k < K; k++) sum_in += int'(ph[k]) - int'(nh[k]);
      load = 1;
      @(posedge clk);
      for (int k = 1; k <= K; k++) begin mp[k] = ph[k-1]; mn[K-k+1] = nh[k-1]; end
      #1;
      compare(t);
      sum_out = 0;
      for (int s = 0; s < K; s++) begin
        bit np [1:K+1];
        bit nn [1:K+1];
        sum_out += int'(ps1) - int'(ns1);
        @(negedge clk);
        load = 0;
        shift = 1;
        @(posedge clk);
        for (int k = 1; k <= K - 1; k++) begin
          np[k] = mp[k+1] & ~mn[K-k+1];
          nn[k] = mn[k+1] & ~mp[K-k+1];
          if (mp[k+1] && mn[K-k+1]) n_cancel++;
        end
        np[K] = 0; nn[K] = 0; np[K+1] = 0; nn[K+1] = 0;
        mp = np; mn = nn;
        #1;
        compare(t);
        @(negedge clk);
        shift = 0;
      end
      checks++;
      if (sum_out != sum_in) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d drained sum %0d != loaded sum %0d", t, sum_out, sum_in);
      end
    end
    checks++;
    if (n_cancel == 0) begin failures++; $display("FAIL no cancel exercised"); end
    $display("cancels=%0d", n_cancel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
