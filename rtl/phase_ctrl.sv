// phase_ctrl: derives the main clock of the inner product from the high
// clock.
//
// The input shift registers must be emptied into the accumulator between
// two main-clock edges, which takes K high-clock steps. One main period is
// therefore K+1 high-clock cycles here: one cycle carrying the main-clock
// edge (`main_tick`: hold registers capture, shift registers load, one
// output bit is emitted) followed by K cycles with `step` high. The main
// clock is realised as this one-cycle enable rather than a separate clock,
// and the extra edge cycle is this design's choice. While `run` is low the
// phase counter stays at zero; the first cycle with `run` high is a
// main_tick.
module phase_ctrl #(
  parameter int unsigned K = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  output logic main_tick,
  output logic step
);

  localparam int unsigned PW = $clog2(K + 1);

  logic [PW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  phase <= '0;
    else if (!run)               phase <= '0;
    else if (phase == PW'(K))    phase <= '0;
    else                         phase <= phase + 1'b1;
  end

  assign main_tick = run && (phase == '0);
  assign step      = run && (phase != '0);

endmodule
