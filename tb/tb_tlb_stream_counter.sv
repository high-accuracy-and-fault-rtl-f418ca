// tb_tlb_stream_counter: drives random TLB bit pairs with random enables and
// compares the count with a running integer sum of p - n.
module tb_tlb_stream_counter;
  import sc_pkg::*;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  tlb_bit_t z;
  logic signed [W-1:0] count;
  int checks = 0, failures = 0;
  int model = 0;

  tlb_stream_counter #(.W(W)) dut (.clk, .rst_n, .clear, .en, .z, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    z = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      z  = tlb_bit_t'($urandom_range(0, 3));
      clear = (i == 1500);
      @(posedge clk);
      if (clear) model = 0;
      else if (en) model += int'(z.p) - int'(z.n);
      #1;
      checks++;
      if (int'(count) != model) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d count=%0d model=%0d", i, count, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
