// input_shift_regs: the input shift registers p_s and n_s with the carry
// cancelers (CC) between them.
//
// On `load` (a main-clock edge) the hold registers are copied crosswise:
// p_h[k] -> p_s[k] and n_h[k] -> n_s[K-k+1] (1-based, as in the paper), so
// the positive and negative parts of one product lie in the same row of
// the two registers. On each `shift` (a high-clock step) both registers
// move one place towards element [1], and zeros enter at element [K]. The
// value written into element [k] passes a CC together with the diagonal
// element of the other register (paper, Eq. 8):
//     p_s[k] <= p_s[k+1] & ~n_s[K-k+1]
//     n_s[k] <= n_s[k+1] & ~p_s[K-k+1]      for k = 1..K-1
// so a +1 and a -1 that meet cancel before they reach the accumulator.
// Because n_s is loaded in reverse order, the two registers drain in
// opposite directions relative to the product index. p_s[1] and n_s[1]
// (ps1, ns1) feed the accumulation stage. If load and shift coincide,
// load wins (the controller never asserts both). Arrays are 0-based:
// ps[0] is element [1].
module input_shift_regs #(
  parameter int unsigned K = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         load,
  input  logic         shift,
  input  logic [K-1:0] ph,
  input  logic [K-1:0] nh,
  output logic         ps1,
  output logic         ns1
);

  logic [K-1:0] ps, ns;
  logic [K-1:0] ps_shift, ns_shift;

  // K-1 cancelers; canceler i takes p_s[i+2] and n_s[K-i] (1-based) and
  // writes p_s[i+1] and n_s[K-i-1].
  for (genvar i = 0; i < K - 1; i++) begin : g_cc
    carry_canceler u_cc (
      .a_i(ps[i+1]),
      .b_i(ns[K-1-i]),
      .a_o(ps_shift[i]),
      .b_o(ns_shift[K-2-i])
    );
  end
  assign ps_shift[K-1] = 1'b0;
  assign ns_shift[K-1] = 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps <= '0;
      ns <= '0;
    end else if (clear) begin
      ps <= '0;
      ns <= '0;
    end else if (load) begin
      for (int k = 0; k < K; k++) begin
        ps[k]     <= ph[k];
        ns[K-1-k] <= nh[k];
      end
    end else if (shift) begin
      ps <= ps_shift;
      ns <= ns_shift;
    end
  end

  assign ps1 = ps[0];
  assign ns1 = ns[0];

  initial assert (K >= 2) else $error("input_shift_regs: K must be at least 2");

endmodule
