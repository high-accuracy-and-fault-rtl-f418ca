// tb_sc_inner_product: end-to-end test of the inner product core at K = 4,
// M = 6 with random TLB input streams.
//  * A cycle model of the whole core (hold registers, crosswise load, input
//    shift registers with cancelers, accumulation algorithm, output
//    flip-flops) runs alongside; every output bit and overflow is compared.
//  * Rate: main_tick must come every K+1 cycles.
//  * Latency: a single +1 product sampled on main edge t must leave the
//    core as Z = +1 after main edge t+2.
//  * Conservation: with random streams followed by zero inputs that flush
//    the carries, the sum of the output stream equals the sum of all
//    products, as long as no overflow occurred.
// A phase of all-positive products forces carry overflow.
module tb_sc_inner_product;
  import sc_pkg::*;
  localparam int K = 4;
  localparam int M = 6;
  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  tlb_bit_t x [K];
  tlb_bit_t y [K];
  logic [M-1:0] flip_p = '0, flip_n = '0;
  logic main_tick, z_valid, overflow;
  tlb_bit_t z;
  int checks = 0, failures = 0;

  sc_inner_product #(.K(K), .M(M)) dut (.clk, .rst_n, .clear, .run, .x, .y, .flip_p, .flip_n,
                                        .main_tick, .z, .z_valid, .overflow);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model (1-based arrays) ----------------
  bit hp [1:K], hn [1:K];
  bit sp [1:K+1], sn [1:K+1];
  bit cp [1:M], cn [1:M];
  bit mzp, mzn;
  int m_ovf;     // carries lost in the model during the current period

  function automatic bit sh(ref bit r [1:M], input int op);
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

  task automatic model_reset();
    for (int i = 1; i <= K; i++) begin hp[i] = 0; hn[i] = 0; end
    for (int i = 1; i <= K + 1; i++) begin sp[i] = 0; sn[i] = 0; end
    for (int i = 1; i <= M; i++) begin cp[i] = 0; cn[i] = 0; end
    mzp = 0; mzn = 0;
  endtask

  // One whole main period: the edge, then K accumulation steps.
  task automatic model_period(input tlb_bit_t xi [K], input tlb_bit_t yi [K]);
    m_ovf = 0;
    mzp = cp[1]; mzn = cn[1];
    void'(sh(cp, 2)); void'(sh(cn, 2));
    for (int k = 1; k <= K; k++) begin sp[k] = hp[k]; sn[K-k+1] = hn[k]; end
    for (int k = 1; k <= K; k++) begin
      int v = (int'(xi[k-1].p) - int'(xi[k-1].n)) * (int'(yi[k-1].p) - int'(yi[k-1].n));
      hp[k] = (v == 1); hn[k] = (v == -1);
    end
    for (int s = 1; s <= K; s++) begin
      int xv = int'(sp[1]) - int'(sn[1]);
      int cv = int'(cp[1]) - int'(cn[1]);
      int op_p = 0, op_n = 0;
      bit np [1:K+1];
      bit nn [1:K+1];
      if (xv == 0) begin
        if (cv == 0) begin op_p = 2; op_n = 2; end
      end else if (xv == 1) begin
        if (cv == 0) begin if (cp[1]) op_n = 2; else op_p = 1; end
        else if (cv == -1) op_n = 2;
        else op_p = 1;
      end else begin
        if (cv == 0) begin if (cp[1]) op_p = 2; else op_n = 1; end
        else if (cv == 1) op_p = 2;
        else op_n = 1;
      end
      m_ovf += int'(sh(cp, op_p)) + int'(sh(cn, op_n));
      for (int k = 1; k <= K - 1; k++) begin
        np[k] = sp[k+1] & ~sn[K-k+1];
        nn[k] = sn[k+1] & ~sp[K-k+1];
      end
      np[K] = 0; nn[K] = 0; np[K+1] = 0; nn[K+1] = 0;
      sp = np; sn = nn;
    end
  endtask
  // ------------------------------------------------------------------

  tlb_bit_t xq [K];
  tlb_bit_t yq [K];
  int sum_prod = 0, sum_out = 0, ovf_seen = 0, tick_no = 0;
  int mode = 0;   // 0 random, 1 all +1 products, 2 zero (flush), 3 single pulse

  task automatic new_inputs();
    for (int k = 0; k < K; k++) begin
      case (mode)
        0: begin x[k] = tlb_bit_t'($urandom_range(0, 3)); y[k] = tlb_bit_t'($urandom_range(0, 3)); end
        1: begin x[k] = tlb_bit_t'(2'b10); y[k] = tlb_bit_t'(2'b10); end
        default: begin x[k] = '0; y[k] = '0; end
      endcase
    end
  endtask

  // Count main edges and check their spacing.
  int last_tick_cycle = -1, cycle = 0;
  always @(posedge clk) begin
    cycle++;
    if (clear) last_tick_cycle = -1;
    else if (rst_n && main_tick) begin
      if (last_tick_cycle >= 0) begin
        checks++;
        if (cycle - last_tick_cycle != K + 1) begin
          failures++;
          $display("FAIL main period %0d cycles", cycle - last_tick_cycle);
        end
      end
      last_tick_cycle = cycle;
    end
  end

  // Drive one main period with the current inputs and compare after it.
  task automatic period();
    int ovf_dut = 0;
    for (int k = 0; k < K; k++) begin xq[k] = x[k]; yq[k] = y[k]; end
    for (int k = 0; k < K; k++)
      sum_prod += (int'(x[k].p) - int'(x[k].n)) * (int'(y[k].p) - int'(y[k].n));
    // wait for the main edge that samples these inputs
    @(posedge clk iff main_tick);
    model_period(xq, yq);
    @(negedge clk);
    checks++;
    if (!z_valid || z.p !== mzp || z.n !== mzn) begin
      failures++;
      if (failures < 10) $display("FAIL tick %0d z=(%0b,%0b) model=(%0b,%0b) valid=%0b", tick_no, z.p, z.n, mzp, mzn, z_valid);
    end
    sum_out += int'(z.p) - int'(z.n);
    tick_no++;
    if (mode != 1) new_inputs();
    for (int c = 0; c < K; c++) begin
      ovf_dut += int'(overflow);
      @(negedge clk);
    end
    checks++;
    if ((ovf_dut != 0) != (m_ovf != 0)) begin
      failures++;
      $display("FAIL overflow dut=%0d model=%0d", ovf_dut, m_ovf);
    end
    ovf_seen += m_ovf;
  endtask

  initial begin
    int t0;
    mode = 0;
    new_inputs();
    model_reset();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;

    // Random streams, then flush with zeros: conservation and bit-exact.
    for (int l = 0; l < 3000; l++) period();
    mode = 2; new_inputs();
    for (int l = 0; l < 3 * M + 4; l++) period();
    checks++;
    if (ovf_seen == 0 && sum_out != sum_prod) begin
      failures++;
      $display("FAIL conservation: out %0d products %0d", sum_out, sum_prod);
    end
    $display("random phase: products=%0d out=%0d overflows=%0d", sum_prod, sum_out, ovf_seen);

    // Latency of a single +1 product on an empty core.
    @(negedge clk);
    clear = 1; run = 0;
    model_reset();
    @(negedge clk);
    clear = 0; run = 1;
    x[0] = tlb_bit_t'(2'b10); y[0] = tlb_bit_t'(2'b01);   // (+1)*(-1) = -1
    t0 = tick_no;
    mode = 3;
    begin
      int seen_at = -1;
      for (int l = 0; l < 6; l++) begin
        period();
        if (l == 0) begin x[0] = '0; y[0] = '0; end
        if (z.n && seen_at < 0) seen_at = l;
      end
      checks++;
      if (seen_at != 2) begin
        failures++;
        $display("FAIL latency: output after edge %0d, expected 2", seen_at);
      end
    end

    // All products +1: K carries per bit, forced overflow.
    mode = 1; new_inputs();
    ovf_seen = 0;
    for (int l = 0; l < 20; l++) period();
    checks++;
    if (ovf_seen == 0) begin failures++; $display("FAIL no overflow in saturation phase"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
