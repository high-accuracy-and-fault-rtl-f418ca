// multiplier_stage: the K stochastic multipliers of the inner product and
// the input hold registers p_h, n_h behind them.
//
// Multiplier k forms V_k = X_k * Y_k on the current TLB stream bits (see
// tlb_multiplier). On every main-clock edge (`main_tick`, an enable in the
// high-clock domain) the product bits are captured: V_p,k into p_h[k] and
// V_n,k into n_h[k]. They stay there for one whole main period, so the
// input shift registers see stable data when they load on the next main
// edge. Index 0 of ph/nh is element [1] of the paper's registers.
// Using an enable instead of a second clock is this design's choice.
module multiplier_stage
  import sc_pkg::*;
#(
  parameter int unsigned K = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         main_tick,
  input  tlb_bit_t     x [K],
  input  tlb_bit_t     y [K],
  output logic [K-1:0] ph,
  output logic [K-1:0] nh
);

  tlb_bit_t v [K];

  for (genvar k = 0; k < K; k++) begin : g_mult
    tlb_multiplier u_mult (.x(x[k]), .y(y[k]), .z(v[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= '0;
      nh <= '0;
    end else if (clear) begin
      ph <= '0;
      nh <= '0;
    end else if (main_tick) begin
      for (int k = 0; k < K; k++) begin
        ph[k] <= v[k].p;
        nh[k] <= v[k].n;
      end
    end
  end

endmodule
