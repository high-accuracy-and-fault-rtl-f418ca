// tb_tlb_sng: two generators (plain and bit-reversed random word) are run
// over many stream bits for a set of input values. Every bit is compared
// with a separately written LFSR/comparator model, the unused line must
// stay zero, and the density of ones must match |x| within 1%.
module tb_tlb_sng;
  import sc_pkg::*;
  localparam int DATA_W = 16;
  localparam int N = 8192;
  localparam logic [15:0] SEED_A = 16'hACE1;
  localparam logic [15:0] SEED_B = 16'h1234;
  logic clk = 0, rst_n = 0, restart = 0, en = 0;
  logic [DATA_W-1:0] value;
  tlb_bit_t bit_a, bit_b;
  int checks = 0, failures = 0;

  tlb_sng #(.DATA_W(DATA_W), .SEED(SEED_A), .REVERSE(1'b0)) dut_a (
    .clk, .rst_n, .restart, .en, .value, .bit_o(bit_a));
  tlb_sng #(.DATA_W(DATA_W), .SEED(SEED_B), .REVERSE(1'b1)) dut_b (
    .clk, .rst_n, .restart, .en, .value, .bit_o(bit_b));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: taps 16, 14, 13, 11 (1-based), new bit enters at the LSB.
  function automatic logic [15:0] lfsr_next(logic [15:0] s);
    logic fb = s[16-1] ^ s[14-1] ^ s[13-1] ^ s[11-1];
    return (s << 1) | 16'(fb);
  endfunction

  function automatic tlb_bit_t ref_bit(logic [15:0] s, bit rev, logic signed [DATA_W-1:0] v);
    logic [15:0] w;
    int r, mag;
    tlb_bit_t b;
    for (int i = 0; i < 16; i++) w[i] = rev ? s[15-i] : s[i];
    r   = int'(w[14:0]);
    mag = (v < 0) ? -int'(v) : int'(v);
    b.p = (v >= 0) && (r < mag);
    b.n = (v < 0) && (r < mag);
    return b;
  endfunction

  initial begin
    logic signed [DATA_W-1:0] vals [8];
    logic [15:0] sa, sb;
    vals = '{16'sh0000, 16'sh4000, -16'sh4000, 16'sh7fff, -16'sh8000, 16'sh1234, -16'sh0C00, 16'sh0001};
    value = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int vi = 0; vi < 8; vi++) begin
      int ones_a, ones_b, mag;
      real dens_a, dens_b, target;
      @(negedge clk);
      value = vals[vi];
      restart = 1;
      @(negedge clk);
      restart = 0;
      en = 1;
      sa = SEED_A; sb = SEED_B;
      ones_a = 0; ones_b = 0;
      for (int t = 0; t < N; t++) begin
        tlb_bit_t ea, eb;
        #1;
        ea = ref_bit(sa, 0, vals[vi]);
        eb = ref_bit(sb, 1, vals[vi]);
        checks++;
        if (bit_a !== ea || bit_b !== eb) begin
          failures++;
          if (failures < 10) $display("FAIL v=%0d t=%0d a=%b/%b b=%b/%b", vals[vi], t, bit_a, ea, bit_b, eb);
        end
        ones_a += int'(bit_a.p | bit_a.n);
        ones_b += int'(bit_b.p | bit_b.n);
        checks++;
        if ((vals[vi] >= 0 && (bit_a.n || bit_b.n)) || (vals[vi] < 0 && (bit_a.p || bit_b.p))) begin
          failures++;
          if (failures < 10) $display("FAIL wrong line active v=%0d", vals[vi]);
        end
        @(negedge clk);
        sa = lfsr_next(sa);
        sb = lfsr_next(sb);
      end
      en = 0;
      mag = (vals[vi] < 0) ? -int'(vals[vi]) : int'(vals[vi]);
      target = real'(mag) / 32768.0;
      dens_a = real'(ones_a) / real'(N);
      dens_b = real'(ones_b) / real'(N);
      checks++;
      if (dens_a - target > 0.01 || target - dens_a > 0.01 ||
          dens_b - target > 0.01 || target - dens_b > 0.01) begin
        failures++;
        $display("FAIL density v=%0d target=%f a=%f b=%f", vals[vi], target, dens_a, dens_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
