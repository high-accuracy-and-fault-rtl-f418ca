// tlb_to_sm: converts one bit pair of a two-line bipolar stream {p,n} into
// one bit pair of a signed-magnitude stream {s,m}.
//
// The magnitude is one exactly when the two TLB lines differ, so m = p ^ n.
// The sign line is the negative line itself, s = n: for the value -1
// (p,n) = (0,1) this gives s = 1, for +1 it gives s = 0, and for a zero
// (m = 0) the sign does not matter. Both equations follow the conversion
// table and circuit of the paper. Purely combinational, no clock.
module tlb_to_sm
  import sc_pkg::*;
(
  input  tlb_bit_t x,
  output sm_bit_t  y
);

  always_comb begin
    y.s = x.n;
    y.m = x.p ^ x.n;
  end

endmodule
