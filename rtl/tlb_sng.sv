// tlb_sng: bit stream generator for the two-line bipolar (TLB) format.
//
// A number x in [-1,1] is given as a signed two's-complement word `value`
// of DATA_W bits, x = value / 2^(DATA_W-1). Since only Xp - Xn matters, the
// generator puts all of x on one line: for x >= 0 the positive line carries
// a unipolar stream of probability |x| and the negative line stays zero,
// for x < 0 the other way round (this split is the paper's). The unipolar
// stream comes from a comparator: the line is one when a random word of
// DATA_W-1 bits is below |x| scaled to 2^(DATA_W-1).
// The random source is this design's choice: a 16-bit maximal-length
// Fibonacci LFSR, polynomial x^16 + x^14 + x^13 + x^11 + 1, started from
// SEED. With REVERSE set the LFSR word is bit-reversed before use, which
// decorrelates two generators that feed the same multiplier.
// Timing: `bit_o` is combinational from the LFSR state and `value`; the
// LFSR advances on each clock edge with `en` high. `restart` reloads SEED.
module tlb_sng
  import sc_pkg::*;
#(
  parameter int unsigned DATA_W  = 16,
  parameter logic [15:0] SEED    = 16'hACE1,
  parameter bit          REVERSE = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              restart,
  input  logic              en,
  input  logic [DATA_W-1:0] value,
  output tlb_bit_t          bit_o
);

  localparam int unsigned RW = DATA_W - 1;  // random word width

  logic [15:0]       lfsr;
  logic [15:0]       word;
  logic [RW-1:0]     rnd;
  logic [DATA_W-1:0] mag;
  logic              neg;
  logic              hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       lfsr <= SEED;
    else if (restart) lfsr <= SEED;
    else if (en)      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  always_comb begin
    for (int i = 0; i < 16; i++) word[i] = REVERSE ? lfsr[15-i] : lfsr[i];
    rnd  = word[14 -: RW];
    neg  = value[DATA_W-1];
    mag  = neg ? (~value + 1'b1) : value;
    hit  = {1'b0, rnd} < mag;
    bit_o.p = hit & ~neg;
    bit_o.n = hit & neg;
  end

  initial begin
    assert (DATA_W >= 2 && DATA_W <= 16) else $error("tlb_sng: DATA_W must be 2..16");
    assert (SEED != 16'h0) else $error("tlb_sng: SEED must be nonzero");
  end

endmodule
