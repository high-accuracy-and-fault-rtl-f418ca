// tb_phase_ctrl: checks that a main period is K+1 cycles (one main_tick
// then K steps), that main_tick and step never coincide, and that the
// first cycle after run rises is a main_tick.
module tb_phase_ctrl;
  localparam int K = 7;
  logic clk = 0, rst_n = 0, run = 0;
  logic main_tick, step;
  int checks = 0, failures = 0;

  phase_ctrl #(.K(K)) dut (.clk, .rst_n, .run, .main_tick, .step);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      int steps, last_tick, ticks;
      @(negedge clk);
      run = 1;
      #1;
      checks++;
      if (!main_tick || step) begin failures++; $display("FAIL first cycle not a tick"); end
      steps = 0; last_tick = 0; ticks = 0;
      for (int c = 0; c < 20 * (K + 1) + r; c++) begin
        if (main_tick && step) begin failures++; $display("FAIL tick and step"); end
        if (main_tick) begin
          if (ticks > 0) begin
            checks++;
            if (c - last_tick != K + 1 || steps != K) begin
              failures++;
              $display("FAIL period=%0d steps=%0d", c - last_tick, steps);
            end
          end
          ticks++; last_tick = c; steps = 0;
        end
        if (step) steps++;
        @(negedge clk);
        #1;
      end
      run = 0;
      #1;
      checks++;
      if (main_tick || step) begin failures++; $display("FAIL active while idle"); end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
