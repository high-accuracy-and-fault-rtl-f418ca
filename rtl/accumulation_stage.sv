// accumulation_stage: the central accumulator of the inner product, a
// shift-register based non-scaled adder with carry registers p_c and n_c
// (M bits each, thermometer coded) and the output flip-flops Z_p, Z_n.
//
// On every `step` the element X = p_s[1] - n_s[1] arriving from the input
// shift registers is added to the stored carry C = p_c[1] - n_c[1]
// (paper, update algorithm of the accumulation stage):
//   X =  0, C = 0      : both registers shift out
//   X = +1, C = 0      : p_c shifts in if p_c[1]=n_c[1]=0,
//                        n_c shifts out if p_c[1]=n_c[1]=1
//   X = +1, C = -1     : n_c shifts out (cancel)
//   X = +1, C = +1     : p_c shifts in
//   X = -1 : the mirror image of X = +1
//   X =  0, C = +-1    : no change (not listed in the algorithm)
// On every `emit` (a main-clock edge) p_c[1] and n_c[1] move into the
// output flip-flops and both registers shift out, so an emitted carry
// leaves the accumulator: one output bit per main period. step and emit
// are never asserted together. `flip_p`/`flip_n` inject bit flips into the
// carry registers for fault experiments (tie to zero otherwise).
// `overflow` pulses in a cycle in which a carry is lost.
module accumulation_stage
  import sc_pkg::*;
#(
  parameter int unsigned M = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         step,
  input  logic         emit,
  input  logic         xp,
  input  logic         xn,
  input  logic [M-1:0] flip_p,
  input  logic [M-1:0] flip_n,
  output tlb_bit_t     z,
  output logic         overflow
);

  logic [M-1:0] pc, nc;
  carry_op_e    op_p, op_n;
  logic         ovf_p, ovf_n;
  logic signed [1:0] xv, cv;

  always_comb begin
    xv   = $signed({1'b0, xp}) - $signed({1'b0, xn});
    cv   = $signed({1'b0, pc[0]}) - $signed({1'b0, nc[0]});
    op_p = CARRY_HOLD;
    op_n = CARRY_HOLD;
    if (emit) begin
      op_p = CARRY_SHIFT_OUT;
      op_n = CARRY_SHIFT_OUT;
    end else if (step) begin
      unique case (xv)
        2'sd0: begin
          if (cv == 2'sd0) begin
            op_p = CARRY_SHIFT_OUT;
            op_n = CARRY_SHIFT_OUT;
          end
        end
        2'sd1: begin
          if (cv == 2'sd0) begin
            if (pc[0]) op_n = CARRY_SHIFT_OUT;  // p_c[1] = n_c[1] = 1
            else       op_p = CARRY_SHIFT_IN;   // p_c[1] = n_c[1] = 0
          end else if (cv == -2'sd1) begin
            op_n = CARRY_SHIFT_OUT;
          end else begin
            op_p = CARRY_SHIFT_IN;
          end
        end
        default: begin // X = -1
          if (cv == 2'sd0) begin
            if (pc[0]) op_p = CARRY_SHIFT_OUT;
            else       op_n = CARRY_SHIFT_IN;
          end else if (cv == 2'sd1) begin
            op_p = CARRY_SHIFT_OUT;
          end else begin
            op_n = CARRY_SHIFT_IN;
          end
        end
      endcase
    end
  end

  carry_shift_reg #(.M(M)) u_pc (
    .clk, .rst_n, .clear, .op(op_p), .flip(flip_p), .q(pc), .overflow(ovf_p)
  );
  carry_shift_reg #(.M(M)) u_nc (
    .clk, .rst_n, .clear, .op(op_n), .flip(flip_n), .q(nc), .overflow(ovf_n)
  );

  assign overflow = ovf_p | ovf_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     z <= '0;
    else if (clear) z <= '0;
    else if (emit) begin
      z.p <= pc[0];
      z.n <= nc[0];
    end
  end

  a_no_step_and_emit: assert property (@(posedge clk) disable iff (!rst_n)
    !(step && emit));

endmodule
