// sc_inner_product: stochastic inner product core, z = sum_{k=1..K} x_k*y_k,
// on two-line bipolar (TLB) streams.
//
// Data flow per stream bit l:
//   1. multiplier_stage: K TLB multipliers form the product bits V_k; they
//      are captured in the hold registers p_h, n_h on a main-clock edge.
//   2. input_shift_regs: on the next main edge the hold registers are
//      copied (n_h reversed) into p_s, n_s; in the following K high-clock
//      steps the elements drain one by one into the accumulator, passing
//      the carry cancelers, which remove +1/-1 pairs on the way.
//   3. accumulation_stage: one central non-scaled adder adds each element
//      into the carry registers p_c, n_c; on every main edge one output bit
//      (p_c[1], n_c[1]) goes to the output flip-flops Z_p, Z_n.
// phase_ctrl makes one main period K+1 high-clock cycles long.
//
// Interface: `x`, `y` are the input stream bits; they are sampled on the
// cycle in which `main_tick` is high and may change after it. `z` changes
// in the cycle after main_tick; `z_valid` marks the first cycle of the new
// value. A bit sampled on main edge t reaches the accumulator during main
// period t+1 and can first appear in z after main edge t+2. `clear` empties
// all registers. `flip_p`/`flip_n` XOR bit flips into p_c/n_c (zero in
// normal use). The architecture is the paper's; the single-clock enable
// scheme and the fault-injection ports are this design's choices.
module sc_inner_product
  import sc_pkg::*;
#(
  parameter int unsigned K = 16,
  parameter int unsigned M = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         run,
  input  tlb_bit_t     x [K],
  input  tlb_bit_t     y [K],
  input  logic [M-1:0] flip_p,
  input  logic [M-1:0] flip_n,
  output logic         main_tick,
  output tlb_bit_t     z,
  output logic         z_valid,
  output logic         overflow
);

  logic         step;
  logic [K-1:0] ph, nh;
  logic         ps1, ns1;

  phase_ctrl #(.K(K)) u_phase (
    .clk, .rst_n, .run(run && !clear), .main_tick, .step
  );

  multiplier_stage #(.K(K)) u_mult (
    .clk, .rst_n, .clear, .main_tick, .x, .y, .ph, .nh
  );

  input_shift_regs #(.K(K)) u_isr (
    .clk, .rst_n, .clear, .load(main_tick), .shift(step),
    .ph, .nh, .ps1, .ns1
  );

  accumulation_stage #(.M(M)) u_acc (
    .clk, .rst_n, .clear, .step, .emit(main_tick),
    .xp(ps1), .xn(ns1), .flip_p, .flip_n, .z, .overflow
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     z_valid <= 1'b0;
    else if (clear) z_valid <= 1'b0;
    else            z_valid <= main_tick;
  end

endmodule
