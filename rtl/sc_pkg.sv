// sc_pkg: types shared by the two-line bipolar (TLB) stochastic inner product.
//
// A TLB stream encodes x in [-1,1] as the difference of two unipolar streams,
// x = (1/L) * sum(Xp[l] - Xn[l]). Each stream bit is therefore a pair {p,n}
// whose value is +1 (1,0), -1 (0,1) or 0 (0,0 or 1,1). The signed-magnitude
// (SM) format carries a sign line s and a magnitude line m, value (1-2s)*m.
// Carry shift registers are driven by a three-way operation code.
package sc_pkg;

  // One bit of a TLB stream pair.
  typedef struct packed {
    logic p;
    logic n;
  } tlb_bit_t;

  // One bit of an SM stream pair.
  typedef struct packed {
    logic s;
    logic m;
  } sm_bit_t;

  // Operation on a carry shift register (one of p_c, n_c).
  //   CARRY_HOLD      keep the contents
  //   CARRY_SHIFT_IN  a one enters at element [1], the rest move towards [M]
  //   CARRY_SHIFT_OUT a zero enters at element [M], element [1] is dropped
  typedef enum logic [1:0] {
    CARRY_HOLD      = 2'd0,
    CARRY_SHIFT_IN  = 2'd1,
    CARRY_SHIFT_OUT = 2'd2
  } carry_op_e;

  // Integer value (-1, 0, +1) of a TLB bit pair.
  function automatic logic signed [1:0] tlb_value(tlb_bit_t b);
    return $signed({1'b0, b.p}) - $signed({1'b0, b.n});
  endfunction

endpackage
