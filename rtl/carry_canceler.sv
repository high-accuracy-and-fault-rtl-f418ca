// carry_canceler: the carry canceler (CC) between diagonal elements of the
// input shift registers p_s and n_s.
//
// Both outputs follow their inputs, except that a one on both inputs (a +1
// and a -1 on their way to the accumulator) is cancelled and both outputs
// become zero: a_o = a_i & ~b_i, b_o = b_i & ~a_i. This is the paper's
// Boolean function. Combinational; the outputs are written into the next
// register elements on a shift.
module carry_canceler (
  input  logic a_i,
  input  logic b_i,
  output logic a_o,
  output logic b_o
);

  always_comb begin
    a_o = a_i & ~b_i;
    b_o = b_i & ~a_i;
  end

endmodule
