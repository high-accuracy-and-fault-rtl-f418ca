// tlb_nonscaled_adder: shift-register based non-scaled adder for two TLB
// streams, Z = X + Y without the factor 1/2 of a scaled (multiplexer) adder.
//
// Each stream bit is in {-1,0,+1}; the output bit can hold only one unit,
// so any excess is stored as a carry in p_c (positive carries) or n_c
// (negative carries), each an M-bit thermometer register (carry_shift_reg).
// Per bit, with S = X + Y (the paper's update algorithm for the adder):
//   S =  0 : Z = p_c[1] - n_c[1]; both registers shift out
//   S = +1 : Z = 1 - n_c[1];      n_c shifts out
//   S = -1 : Z = p_c[1] - 1;      p_c shifts out
//   S = +2 : Z = +1; n_c shifts out if n_c[1] = 1 (cancel), else p_c shifts in
//   S = -2 : Z = -1; p_c shifts out if p_c[1] = 1 (cancel), else n_c shifts in
// A shift in with a full register loses that carry (overflow pulses).
// Interface: `en` marks a valid input bit; the carry registers change only
// then. `z` is combinational from x, y and the register heads, so the sum
// bit belongs to the same cycle as its inputs (the output timing is this
// design's choice). z is encoded +1 = (1,0), -1 = (0,1), 0 = (0,0).
module tlb_nonscaled_adder
  import sc_pkg::*;
#(
  parameter int unsigned M = 6
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  tlb_bit_t x,
  input  tlb_bit_t y,
  output tlb_bit_t z,
  output logic     overflow
);

  logic [M-1:0] pc, nc;
  carry_op_e    op_p, op_n;
  logic         ovf_p, ovf_n;
  logic signed [2:0] s;
  logic signed [1:0] zv;

  always_comb begin
    s    = 3'(tlb_value(x)) + 3'(tlb_value(y));
    zv   = 2'sd0;
    op_p = CARRY_HOLD;
    op_n = CARRY_HOLD;
    unique case (s)
      3'sd0: begin
        zv   = $signed({1'b0, pc[0]}) - $signed({1'b0, nc[0]});
        op_p = CARRY_SHIFT_OUT;
        op_n = CARRY_SHIFT_OUT;
      end
      3'sd1: begin
        zv   = nc[0] ? 2'sd0 : 2'sd1;
        op_n = CARRY_SHIFT_OUT;
      end
      -3'sd1: begin
        zv   = pc[0] ? 2'sd0 : -2'sd1;
        op_p = CARRY_SHIFT_OUT;
      end
      3'sd2: begin
        zv = 2'sd1;
        if (nc[0]) op_n = CARRY_SHIFT_OUT;
        else       op_p = CARRY_SHIFT_IN;
      end
      default: begin // -2
        zv = -2'sd1;
        if (pc[0]) op_p = CARRY_SHIFT_OUT;
        else       op_n = CARRY_SHIFT_IN;
      end
    endcase
    if (!en) begin
      op_p = CARRY_HOLD;
      op_n = CARRY_HOLD;
    end
    z.p = (zv == 2'sd1);
    z.n = (zv == -2'sd1);
  end

  carry_shift_reg #(.M(M)) u_pc (
    .clk, .rst_n, .clear(1'b0), .op(op_p), .flip('0), .q(pc), .overflow(ovf_p)
  );
  carry_shift_reg #(.M(M)) u_nc (
    .clk, .rst_n, .clear(1'b0), .op(op_n), .flip('0), .q(nc), .overflow(ovf_n)
  );

  assign overflow = ovf_p | ovf_n;

endmodule
