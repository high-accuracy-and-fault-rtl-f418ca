// tlb_multiplier: stochastic multiplier for two-line bipolar (TLB) streams.
//
// Each input pair is converted to signed-magnitude form, multiplied there
// (sign = XOR of the signs, magnitude = AND of the magnitudes) and converted
// back to TLB. Per stream bit the output value is the product of the input
// values in {-1,0,+1}; for uncorrelated streams the output stream encodes
// z = x*y. The structure (TLB->SM interface, SM core, SM->TLB interface) is
// the paper's; logic optimisation is left to synthesis. Combinational.
module tlb_multiplier
  import sc_pkg::*;
(
  input  tlb_bit_t x,
  input  tlb_bit_t y,
  output tlb_bit_t z
);

  sm_bit_t x_sm, y_sm, z_sm;

  tlb_to_sm u_x_conv (.x(x), .y(x_sm));
  tlb_to_sm u_y_conv (.x(y), .y(y_sm));

  always_comb begin
    z_sm.s = x_sm.s ^ y_sm.s;
    z_sm.m = x_sm.m & y_sm.m;
  end

  sm_to_tlb u_z_conv (.x(z_sm), .y(z));

endmodule
