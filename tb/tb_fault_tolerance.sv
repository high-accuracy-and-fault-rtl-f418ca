// tb_fault_tolerance: bit-flip robustness of the complete unit at its
// default size (K = 16, M = 6, L = 10^4), the configuration of the
// fault-tolerance experiment: once per output bit, each of the 2*M
// carry-register bits is inverted with probability P_flip. For P_flip = 0, 1%, 2%, 3%, 5% a set of random vectors
// (entries uniform in [-0.5, 0.5]) is evaluated and two error figures are
// printed: the usual root-mean-square error and sqrt(mean |error|).
// Checks: without flips the RMS error stays below 0.05; with flips the
// result stays bounded (RMS error below 0.5 at 5%) and the error does not
// fall as P_flip grows by more than the noise of the estimate.
module tb_fault_tolerance;
  import sc_pkg::*;
  localparam int K = 16, M = 6, L = 10000, DATA_W = 16;
  localparam int CNT_W = $clog2(L + 1) + 1;
  localparam int NVEC = 16;

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
  int pflip_permille = 0;
  int n_flips = 0;

  sc_inner_product_top dut (.clk, .rst_n, .start, .x, .y, .flip_p, .flip_n, .busy, .done,
                            .result, .z_tlb, .z_sm, .z_valid, .overflow_count);

  always #5 clk = ~clk;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One flip decision per output bit, applied for one cycle.
  always @(negedge clk) begin
    flip_p <= '0;
    flip_n <= '0;
    if (busy && z_valid) begin
      for (int b = 0; b < M; b++) begin
        if ($urandom_range(0, 999) < pflip_permille) begin flip_p[b] <= 1'b1; n_flips++; end
        if ($urandom_range(0, 999) < pflip_permille) begin flip_n[b] <= 1'b1; n_flips++; end
      end
    end
  end

  initial begin
    int plist [5] = '{0, 10, 20, 30, 50};
    real rms [5];
    for (int k = 0; k < K; k++) begin x[k] = '0; y[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pi = 0; pi < 5; pi++) begin
      real se, ae;
      se = 0.0; ae = 0.0;
      pflip_permille = plist[pi];
      for (int v = 0; v < NVEC; v++) begin
        real exact, got, e;
        exact = 0.0;
        for (int k = 0; k < K; k++) begin
          x[k] = DATA_W'(int'($urandom_range(0, 32768)) - 16384);
          y[k] = DATA_W'(int'($urandom_range(0, 32768)) - 16384);
          exact += (real'($signed(x[k])) / 32768.0) * (real'($signed(y[k])) / 32768.0);
        end
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        @(posedge clk iff done);
        got = real'(result) / real'(L);
        e = got - exact;
        se += e * e;
        ae += (e < 0) ? -e : e;
      end
      rms[pi] = $sqrt(se / NVEC);
      $display("P_flip=%0d.%0d%%  RMSE=%f  sqrt(mean|err|)=%f", plist[pi] / 10, plist[pi] % 10,
               rms[pi], $sqrt(ae / NVEC));
    end
    checks++;
    if (rms[0] > 0.05) begin failures++; $display("FAIL error without flips too large"); end
    checks++;
    if (rms[4] > 0.5) begin failures++; $display("FAIL error at 5%% flips unbounded"); end
    checks++;
    if (rms[4] + 0.02 < rms[0]) begin failures++; $display("FAIL error falls with more flips"); end
    checks++;
    if (n_flips == 0) begin failures++; $display("FAIL no flips injected"); end
    $display("flips injected: %0d", n_flips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
