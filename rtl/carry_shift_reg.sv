// carry_shift_reg: one carry shift register (p_c or n_c) of a shift-register
// based non-scaled adder.
//
// The register holds the number of stored carries as a thermometer code:
// element [1] (q[0]) is set whenever at least one carry is stored.
//   CARRY_SHIFT_IN : a one enters at element [1], every element moves one
//                    place towards [M]; a one in element [M] is lost, which
//                    is a carry overflow and pulses `overflow`.
//   CARRY_SHIFT_OUT: a zero enters at element [M], every element moves one
//                    place towards [1]; element [1] leaves the register.
//   CARRY_HOLD     : no change.
// The two shift directions and the ones/zeros that enter follow the paper's
// adder and accumulator figures. The `flip` mask is XORed into the next
// state and exists only to inject bit flips (fault-tolerance experiments);
// tie it to zero in normal use. `clear` empties the register synchronously.
// All updates happen on the rising clock edge; `q` and `overflow` are
// available in the same cycle (overflow is combinational from op and q).
module carry_shift_reg
  import sc_pkg::*;
#(
  parameter int unsigned M = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  carry_op_e    op,
  input  logic [M-1:0] flip,
  output logic [M-1:0] q,
  output logic         overflow
);

  logic [M-1:0] q_shifted;

  always_comb begin
    unique case (op)
      CARRY_SHIFT_IN:  q_shifted = {q[M-2:0], 1'b1};
      CARRY_SHIFT_OUT: q_shifted = {1'b0, q[M-1:1]};
      default:         q_shifted = q;
    endcase
  end

  assign overflow = (op == CARRY_SHIFT_IN) && q[M-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (clear) q <= '0;
    else            q <= q_shifted ^ flip;
  end

  initial assert (M >= 2) else $error("carry_shift_reg: M must be at least 2");

  a_op_legal: assert property (@(posedge clk) disable iff (!rst_n)
    op inside {CARRY_HOLD, CARRY_SHIFT_IN, CARRY_SHIFT_OUT});

endmodule
