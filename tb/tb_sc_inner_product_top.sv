// tb_sc_inner_product_top: end-to-end test of the complete inner-product
// unit at its default size (K = 16, M = 6, L = 10^4, 16-bit inputs).
// Each run loads two vectors, pulses start and waits for done. Checked:
//  * result / L against the exact inner product computed here in floating
//    point (tolerance 0.08, about four standard deviations of the stream
//    noise at L = 10^4);
//  * run length: done is seen (L+1)*(K+1)+2 cycles after the edge that samples start;
//  * the signed-magnitude output equals the TLB output bit by bit;
//  * the number of z_valid strobes counted equals L + 2 per run.
// Mechanisms that must occur at least once (counted by probing the
// hierarchy): a carry cancelled in the input shift registers, a stored
// carry cancelled in the accumulator, a carry shift-in, a carry overflow
// (a run whose sum far exceeds 1 must saturate near +1), and a bit flip
// injected into the carry registers.
module tb_sc_inner_product_top;
  import sc_pkg::*;
  localparam int K = 16, M = 6, L = 10000, DATA_W = 16;
  localparam int CNT_W = $clog2(L + 1) + 1;

  logic clk = 0, rst_n = 0, start = 0;
  logic [DATA_W-1:0] x [K];
  logic [DATA_W-1:0] y [K];
  logic [M-1:0] flip_p = '0, flip_n = '0;
  logic busy, done, z_valid;
  logic signed [CNT_W-1:0] result;
  tlb_bit_t z_tlb;
  sm_bit_t  z_sm;
  logic [CNT_W-1:0] overflow_count;
  int checks = 0, failures = 0;
  int n_cc_cancel = 0, n_acc_cancel = 0, n_shift_in = 0, n_overflow = 0, n_flip = 0, n_strobes = 0;

  sc_inner_product_top dut (.clk, .rst_n, .start, .x, .y, .flip_p, .flip_n, .busy, .done,
                            .result, .z_tlb, .z_sm, .z_valid, .overflow_count);

  always #5 clk = ~clk;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism probes and the SM/TLB output comparison.
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.u_isr.shift) begin
      for (int i = 0; i < K - 1; i++)
        if (dut.u_core.u_isr.ps[i+1] && dut.u_core.u_isr.ns[K-1-i]) n_cc_cancel++;
    end
    if (dut.u_core.u_acc.step) begin
      if ((dut.u_core.u_acc.op_n == CARRY_SHIFT_OUT && dut.u_core.u_acc.xp && !dut.u_core.u_acc.xn) ||
          (dut.u_core.u_acc.op_p == CARRY_SHIFT_OUT && dut.u_core.u_acc.xn && !dut.u_core.u_acc.xp))
        n_acc_cancel++;
      if (dut.u_core.u_acc.op_p == CARRY_SHIFT_IN || dut.u_core.u_acc.op_n == CARRY_SHIFT_IN)
        n_shift_in++;
    end
    if (dut.core_ovf) n_overflow++;
    if (flip_p != '0 || flip_n != '0) n_flip++;
    if (z_valid && busy) begin
      n_strobes++;
      checks++;
      if (z_sm.m != (z_tlb.p ^ z_tlb.n) || (z_sm.m && z_sm.s != z_tlb.n)) begin
        failures++;
        $display("FAIL SM output (%0b,%0b) vs TLB (%0b,%0b)", z_sm.s, z_sm.m, z_tlb.p, z_tlb.n);
      end
    end
  end

  function automatic logic [DATA_W-1:0] to_fix(real v);
    int i = int'($rtoi(v * 32768.0));
    if (i > 32767) i = 32767;
    if (i < -32768) i = -32768;
    return DATA_W'(i);
  endfunction

  function automatic real from_fix(logic [DATA_W-1:0] w);
    return real'($signed(w)) / 32768.0;
  endfunction

  // Run one computation; returns the decoded result.
  task automatic run_once(input string name, input real tol, input bit inject);
    real exact, got, err;
    int cycles;
    exact = 0.0;
    for (int k = 0; k < K; k++) exact += from_fix(x[k]) * from_fix(y[k]);
    n_strobes = 0;
    @(negedge clk);
    start = 1;
    @(posedge clk);
    cycles = 0;
    @(negedge clk);
    start = 0;
    while (!done) begin
      if (inject) begin
        flip_p = ($urandom_range(0, 999) == 0) ? M'(1 << $urandom_range(0, M-1)) : '0;
        flip_n = ($urandom_range(0, 999) == 0) ? M'(1 << $urandom_range(0, M-1)) : '0;
      end
      @(posedge clk);
      cycles++;
      @(negedge clk);
    end
    flip_p = '0; flip_n = '0;
    got = real'(result) / real'(L);
    err = got - exact;
    if (err < 0) err = -err;
    checks++;
    if (err > tol) begin
      failures++;
      $display("FAIL %s: exact %f got %f", name, exact, got);
    end
    checks++;
    if (cycles != (L + 1) * (K + 1) + 2) begin
      failures++;
      $display("FAIL %s: run took %0d cycles, expected %0d", name, cycles, (L + 1) * (K + 1) + 2);
    end
    checks++;
    if (n_strobes != L + 2) begin
      failures++;
      $display("FAIL %s: %0d output strobes", name, n_strobes);
    end
    $display("%s: exact %f result %0d/%0d = %f  overflows %0d", name, exact, result, L, got, overflow_count);
  endtask

  initial begin
    for (int k = 0; k < K; k++) begin x[k] = '0; y[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. zero vector: the result must be exactly zero
    run_once("zero", 0.0, 0);

    // 2. single product 0.5 * 0.75
    x[3] = to_fix(0.5); y[3] = to_fix(0.75);
    run_once("single", 0.08, 0);

    // 3. random vectors with |x_k|, |y_k| <= 0.5 (sum stays inside [-1, 1])
    for (int r = 0; r < 3; r++) begin
      for (int k = 0; k < K; k++) begin
        x[k] = to_fix(real'(int'($urandom_range(0, 20000)) - 10000) / 20000.0);
        y[k] = to_fix(real'(int'($urandom_range(0, 20000)) - 10000) / 20000.0);
      end
      run_once($sformatf("random%0d", r), 0.08, 0);
    end

    // 4. alternating signs, products +0.25 and -0.3, sum -0.4
    for (int k = 0; k < K; k++) begin
      x[k] = to_fix((k % 2 == 0) ? 0.5 : -0.5);
      y[k] = to_fix((k % 2 == 0) ? 0.5 : 0.6);
    end
    run_once("alternating", 0.08, 0);

    // 5. fault injection on the random case: bit flips into p_c / n_c
    for (int k = 0; k < K; k++) begin
      x[k] = to_fix(real'(int'($urandom_range(0, 20000)) - 10000) / 20000.0);
      y[k] = to_fix(real'(int'($urandom_range(0, 20000)) - 10000) / 20000.0);
    end
    run_once("bit_flips", 0.15, 1);

    // 6. saturation: every product near +1, the sum (about 14) cannot be
    //    represented; the result must saturate near +1 with carry overflow.
    for (int k = 0; k < K; k++) begin x[k] = to_fix(0.95); y[k] = to_fix(0.95); end
    begin
      real got;
      run_once("saturate", 100.0, 0);
      got = real'(result) / real'(L);
      checks++;
      if (got < 0.95 || overflow_count == 0) begin
        failures++;
        $display("FAIL saturate: result %f overflows %0d", got, overflow_count);
      end
    end

    $display("mechanisms: cc_cancel=%0d acc_cancel=%0d shift_in=%0d overflow=%0d flip=%0d",
             n_cc_cancel, n_acc_cancel, n_shift_in, n_overflow, n_flip);
    checks++;
    if (n_cc_cancel == 0 || n_acc_cancel == 0 || n_shift_in == 0 || n_overflow == 0 || n_flip == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
