// tb_accumulation_stage: drives the accumulator the way the core does (one
// emit, then K steps with random X = xp - xn) and compares the output
// flip-flops and the overflow flag with a model that keeps p_c and n_c as
// 1-based bit arrays and applies the accumulation algorithm case by case.
// Phases: random X (carries mostly cancel), runs of +1 and -1 (carry build-
// up, overflow, then cancellation of stored carries by opposite inputs),
// and a phase with random bit flips, which can leave p_c[1] = n_c[1] = 1
// and so exercises the algorithm's C = 0 cases with both heads set.
// Without flips and overflow, the emitted stream plus the stored carries
// must also equal the sum of all inputs.
module tb_accumulation_stage;
  import sc_pkg::*;
  localparam int M = 4;
  localparam int K = 5;
  logic clk = 0, rst_n = 0, clear = 0, step = 0, emit = 0, xp = 0, xn = 0;
  logic [M-1:0] flip_p, flip_n;
  tlb_bit_t z;
  logic overflow;
  bit mp [1:M];
  bit mn [1:M];
  bit zp_m, zn_m;
  int checks = 0, failures = 0;
  int n_ovf = 0, n_cancel = 0, n_both = 0, n_shift_in = 0;
  int sum_in = 0, sum_out = 0;
  bit clean = 1;

  accumulation_stage #(.M(M)) dut (.clk, .rst_n, .clear, .step, .emit, .xp, .xn,
                                   .flip_p, .flip_n, .z, .overflow);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cnt(bit a [1:M]);
    int s = 0;
    for (int i = 1; i <= M; i++) s += int'(a[i]);
    return s;
  endfunction

  // op: 0 hold, 1 shift in, 2 shift out. Returns 1 if a carry is lost.
  function automatic bit apply(ref bit r [1:M], input int op);
    bit lost = 0;
    if (op == 1) begin
      lost = r[M];
      for (int i = M; i >= 2; i--) r[i] = r[i-1];
      r[1] = 1;
    end else if (op == 2) begin
      for (int i = 1; i < M; i++) r[i] = r[i+1];
      r[M] = 0;
    end
    return lost;
  endfunction

  initial begin
    flip_p = '0; flip_n = '0;
    for (int i = 1; i <= M; i++) begin mp[i] = 0; mn[i] = 0; end
    zp_m = 0; zn_m = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int period = 0; period < 3000; period++) begin
      int phase;
      phase = (period < 800) ? 0 : (period < 1600) ? 1 : (period < 2200) ? 2 : 3;
      for (int c = 0; c <= K; c++) begin
        int op_p, op_n, xv, cv;
        bit exp_ovf;
        @(negedge clk);
        emit = (c == 0);
        step = (c != 0);
        if (phase == 1) begin
          // runs of equal signs: eight periods of +1, eight of -1
          automatic int sgn = ((period / 8) % 2 == 0) ? 1 : -1;
          automatic int r = $urandom_range(0, 9);
          xp = (r < 7) ? (sgn > 0) : (r == 7);
          xn = (r < 7) ? (sgn < 0) : (r == 8);
        end else begin
          xp = $urandom_range(0, 1);
          xn = $urandom_range(0, 1);
        end
        flip_p = '0; flip_n = '0;
        if (phase == 2 && $urandom_range(0, 9) == 0) begin
          if ($urandom_range(0, 1) == 0) flip_p = M'(1 << $urandom_range(0, M-1));
          else                           flip_n = M'(1 << $urandom_range(0, M-1));
          clean = 0;
        end
        // reference
        xv = int'(xp) - int'(xn);
        cv = int'(mp[1]) - int'(mn[1]);
        op_p = 0; op_n = 0;
        if (emit) begin
          op_p = 2; op_n = 2;
        end else if (xv == 0) begin
          if (cv == 0) begin op_p = 2; op_n = 2; end
        end else if (xv == 1) begin
          if (cv == 0 && mp[1]) begin op_n = 2; n_both++; end
          else if (cv == 0)     begin op_p = 1; n_shift_in++; end
          else if (cv == -1)    begin op_n = 2; n_cancel++; end
          else                  begin op_p = 1; n_shift_in++; end
        end else begin
          if (cv == 0 && mp[1]) begin op_p = 2; n_both++; end
          else if (cv == 0)     begin op_n = 1; n_shift_in++; end
          else if (cv == 1)     begin op_p = 2; n_cancel++; end
          else                  begin op_n = 1; n_shift_in++; end
        end
        #1;
        exp_ovf = (op_p == 1 && mp[M]) || (op_n == 1 && mn[M]);
        checks++;
        if (overflow !== exp_ovf) begin
          failures++;
          if (failures < 10) $display("FAIL p%0d c%0d overflow=%0b exp=%0b", period, c, overflow, exp_ovf);
        end
        if (exp_ovf) begin n_ovf++; clean = 0; end
        if (emit) begin
          zp_m = mp[1]; zn_m = mn[1];
          sum_out += int'(mp[1]) - int'(mn[1]);
        end else begin
          sum_in += xv;
        end
        void'(apply(mp, op_p));
        void'(apply(mn, op_n));
        for (int i = 1; i <= M; i++) begin mp[i] ^= flip_p[i-1]; mn[i] ^= flip_n[i-1]; end
        @(posedge clk);
        #1;
        checks++;
        if (z.p !== zp_m || z.n !== zn_m) begin
          failures++;
          if (failures < 10) $display("FAIL p%0d c%0d z=(%0b,%0b) exp=(%0b,%0b)", period, c, z.p, z.n, zp_m, zn_m);
        end
      end
      // conservation over the clean part of the run (before overflow/flips)
      if (clean) begin
        checks++;
        if (sum_out + cnt(mp) - cnt(mn) != sum_in) begin
          failures++;
          $display("FAIL conservation period %0d", period);
        end
      end
    end
    emit = 0; step = 0;
    checks++;
    if (n_ovf == 0 || n_cancel == 0 || n_both == 0 || n_shift_in == 0) begin
      failures++;
      $display("FAIL mechanism missing ovf=%0d cancel=%0d both=%0d shift_in=%0d", n_ovf, n_cancel, n_both, n_shift_in);
    end
    $display("overflows=%0d cancels=%0d both_heads=%0d shift_ins=%0d", n_ovf, n_cancel, n_both, n_shift_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
