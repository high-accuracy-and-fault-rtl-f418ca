// tb_accuracy_vs_m: accuracy of the complete unit against the carry
// register length M, at K = 16 and L = 10^4. Four units with M = 2, 3, 4
// and 6 receive the same random vectors (entries uniform in [-0.5, 0.5])
// and start together; the RMS error of result / L against the exact inner
// product is printed for each M, with the number of lost carries.
// Checked: at M = 6 (the default) the RMS error is at most 0.03, and a
// shorter carry register is never more accurate than M = 6 by more than
// the noise of the estimate, while M = 2 loses carries.
module tb_accuracy_vs_m;
  import sc_pkg::*;
  localparam int K = 16, L = 10000, DATA_W = 16;
  localparam int CNT_W = $clog2(L + 1) + 1;
  localparam int NVEC = 16;
  localparam int NM = 4;
  localparam int MS [NM] = '{2, 3, 4, 6};

  logic clk = 0, rst_n = 0, start = 0;
  logic [DATA_W-1:0] x [K];
  logic [DATA_W-1:0] y [K];
  logic                    done [NM];
  logic signed [CNT_W-1:0] result [NM];
  logic [CNT_W-1:0]        ovf [NM];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NM; i++) begin : g_unit
    localparam int M = MS[i];
    logic busy, z_valid;
    tlb_bit_t z_tlb;
    sm_bit_t  z_sm;
    sc_inner_product_top #(.K(K), .M(M), .L(L), .DATA_W(DATA_W)) dut (
      .clk, .rst_n, .start, .x, .y, .flip_p('0), .flip_n('0), .busy, .done(done[i]),
      .result(result[i]), .z_tlb, .z_sm, .z_valid, .overflow_count(ovf[i]));
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real se [NM];
    int  lost [NM];
    real rms [NM];
    for (int i = 0; i < NM; i++) begin se[i] = 0.0; lost[i] = 0; end
    for (int k = 0; k < K; k++) begin x[k] = '0; y[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NVEC; v++) begin
      real exact;
      exact = 0.0;
      for (int k = 0; k < K; k++) begin
        x[k] = DATA_W'(int'($urandom_range(0, 32768)) - 16384);
        y[k] = DATA_W'(int'($urandom_range(0, 32768)) - 16384);
        exact += (real'($signed(x[k])) / 32768.0) * (real'($signed(y[k])) / 32768.0);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      @(negedge clk iff done[0]);
      for (int i = 0; i < NM; i++) begin
        real e;
        checks++;
        if (!done[i]) begin failures++; $display("FAIL unit M=%0d not done with the others", MS[i]); end
        e = real'(result[i]) / real'(L) - exact;
        se[i] += e * e;
        lost[i] += int'(ovf[i]);
      end
    end
    for (int i = 0; i < NM; i++) begin
      rms[i] = $sqrt(se[i] / NVEC);
      $display("M=%0d  RMSE=%f  lost-carry cycles=%0d", MS[i], rms[i], lost[i]);
    end
    checks++;
    if (rms[NM-1] > 0.03) begin failures++; $display("FAIL RMSE at M=6 above 0.03"); end
    checks++;
    if (rms[0] + 0.005 < rms[NM-1]) begin failures++; $display("FAIL M=2 more accurate than M=6"); end
    checks++;
    if (lost[0] == 0) begin failures++; $display("FAIL M=2 never overflowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
