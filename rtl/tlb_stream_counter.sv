// tlb_stream_counter: back conversion of a two-line bipolar stream to a
// binary number.
//
// Following x = (1/L) * sum(Xp[l] - Xn[l]), the counter adds +1 for a bit
// pair (1,0), -1 for (0,1) and nothing for (0,0) or (1,1) on every cycle
// with `en` high. The signed W-bit `count` divided by the stream length L
// is the decoded value; the division is left to the user. The paper only
// names the back conversion; this up/down counter is the plain reading of
// the format. `clear` zeroes the count synchronously.
module tlb_stream_counter
  import sc_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                en,
  input  tlb_bit_t            z,
  output logic signed [W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clear) count <= '0;
    else if (en)    count <= count + W'(tlb_value(z));
  end

endmodule
