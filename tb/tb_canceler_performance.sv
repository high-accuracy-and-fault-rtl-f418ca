// tb_canceler_performance: how often a one leaves the input shift
// registers towards the accumulator. Each hold-register element pair is
// filled as a product bit that is one with probability 0.5 (+1 or -1 with
// equal odds, never both lines), loaded, and drained with K shifts; P_p
// (P_n) is the fraction of drained p_s[1] (n_s[1]) values that are one,
// averaged over many loads. Without cancelling it would be 0.25;
// cancelling in the opposite-direction registers brings it down, more so
// for longer registers. K = 2, 16 and 64 are measured. Checked: P_p and
// P_n agree within 0.01, all values are at most 0.26, and the value
// falls from K = 2 to K = 16 to K = 64.
module tb_canceler_performance;
  localparam int NLOAD = 4000;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [1:0]  ph2, nh2;
  logic [15:0] ph16, nh16;
  logic [63:0] ph64, nh64;
  logic p2, n2, p16, n16, p64, n64;
  int checks = 0, failures = 0;
  int cnt_p [3], cnt_n [3];

  input_shift_regs #(.K(2))  u2  (.clk, .rst_n, .clear(1'b0), .load, .shift, .ph(ph2),  .nh(nh2),  .ps1(p2),  .ns1(n2));
  input_shift_regs #(.K(16)) u16 (.clk, .rst_n, .clear(1'b0), .load, .shift, .ph(ph16), .nh(nh16), .ps1(p16), .ns1(n16));
  input_shift_regs #(.K(64)) u64 (.clk, .rst_n, .clear(1'b0), .load, .shift, .ph(ph64), .nh(nh64), .ps1(p64), .ns1(n64));

  always #5 clk = ~clk;

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pp [3], pn [3];
    int  kk [3] = '{2, 16, 64};
    for (int i = 0; i < 3; i++) begin cnt_p[i] = 0; cnt_n[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NLOAD; t++) begin
      @(negedge clk);
      for (int k = 0; k < 64; k++) begin
        // a product bit is nonzero with probability 0.5, then +1 or -1
        automatic int v = $urandom_range(0, 3);
        ph64[k] = (v == 2);
        nh64[k] = (v == 3);
      end
      ph16 = ph64[15:0]; nh16 = nh64[15:0];
      ph2  = ph64[1:0];  nh2  = nh64[1:0];
      load = 1;
      for (int s = 0; s < 64; s++) begin
        @(negedge clk);
        load = 0; shift = 1;
        // sample the head before this shift
        if (s < 2)  begin cnt_p[0] += int'(p2);  cnt_n[0] += int'(n2);  end
        if (s < 16) begin cnt_p[1] += int'(p16); cnt_n[1] += int'(n16); end
        cnt_p[2] += int'(p64); cnt_n[2] += int'(n64);
      end
      @(negedge clk);
      shift = 0;
    end
    for (int i = 0; i < 3; i++) begin
      pp[i] = real'(cnt_p[i]) / real'(NLOAD * kk[i]);
      pn[i] = real'(cnt_n[i]) / real'(NLOAD * kk[i]);
      $display("K=%0d  P_p=%f  P_n=%f", kk[i], pp[i], pn[i]);
      checks++;
      if (pp[i] - pn[i] > 0.01 || pn[i] - pp[i] > 0.01 || pp[i] > 0.26) begin
        failures++;
        $display("FAIL K=%0d", kk[i]);
      end
    end
    checks++;
    if (!(pp[0] > pp[1] && pp[1] > pp[2])) begin failures++; $display("FAIL not decreasing with K"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
