// sm_to_tlb: converts one bit pair of a signed-magnitude stream {s,m} into
// one bit pair of a two-line bipolar stream {p,n}.
//
// A set magnitude bit goes to the negative line when the sign is set and to
// the positive line otherwise: n = s & m, p = ~s & m. A zero magnitude gives
// (p,n) = (0,0), one of the two encodings of zero the TLB format allows.
// This follows the paper's conversion table and circuit. Combinational.
module sm_to_tlb
  import sc_pkg::*;
(
  input  sm_bit_t  x,
  output tlb_bit_t y
);

  always_comb begin
    y.n = x.s & x.m;
    y.p = ~x.s & x.m;
  end

endmodule
