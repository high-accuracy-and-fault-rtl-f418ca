// sc_inner_product_top: a complete stochastic inner-product unit,
// result / L ~= sum_{k=1..K} x_k * y_k, with x_k, y_k in [-1,1] given as
// binary words and L = 10^4 stream bits.
//
// Blocks: 2K bit stream generators (tlb_sng) turn the latched inputs into
// two-line bipolar (TLB) streams, one bit per main period; the inner
// product core (sc_inner_product) multiplies and accumulates them; the
// output stream is given both in TLB form and, through tlb_to_sm, in
// signed-magnitude form; tlb_stream_counter sums the output stream.
//
// Operation: pulse `start` for one cycle with x, y valid. The inputs are
// latched, all state is cleared, the generators restart from their seeds,
// and `busy` rises. One main period is K+1 clock cycles. The first two
// output bits after start are pipeline fill and are not counted; the next
// L output bits are. After them `busy` falls, `done` pulses for one cycle
// and `result` holds sum(Z_p - Z_n) over the L bits. `done` is high after
// the (L+1)*(K+1)+2-th clock edge following the edge that samples start
// (170,019 cycles at the defaults). Carries still stored when the stream ends are
// dropped. `overflow_count` counts cycles in which a carry was lost.
// `z_tlb`, `z_sm` change when `z_valid` is high (one bit per main period).
// `flip_p`/`flip_n` inject bit flips into the carry registers for fault
// experiments and are zero in normal use.
// The input number format, LFSR seeds and the counting window are this
// design's choices; K, M and L default to the paper's main configuration.
module sc_inner_product_top
  import sc_pkg::*;
#(
  parameter int unsigned K      = 16,
  parameter int unsigned M      = 6,
  parameter int unsigned L      = 10000,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned CNT_W = $clog2(L + 1) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [DATA_W-1:0]       x [K],
  input  logic [DATA_W-1:0]       y [K],
  input  logic [M-1:0]            flip_p,
  input  logic [M-1:0]            flip_n,
  output logic                    busy,
  output logic                    done,
  output logic signed [CNT_W-1:0] result,
  output tlb_bit_t                z_tlb,
  output sm_bit_t                 z_sm,
  output logic                    z_valid,
  output logic [CNT_W-1:0]        overflow_count
);

  localparam int unsigned TW = $clog2(L + 3);

  // Distinct nonzero LFSR seeds per generator.
  function automatic logic [15:0] seed_of(logic [15:0] idx, logic [15:0] base,
                                          logic [15:0] stride);
    logic [15:0] s;
    s = base + idx * stride;
    return (s == 16'h0) ? 16'h0001 : s;
  endfunction

  logic [DATA_W-1:0] x_q [K];
  logic [DATA_W-1:0] y_q [K];
  tlb_bit_t          xs [K];
  tlb_bit_t          ys [K];
  logic              main_tick;
  logic              core_ovf;
  logic [TW-1:0]     ticks;
  logic              count_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) begin
        x_q[k] <= '0;
        y_q[k] <= '0;
      end
    end else if (start && !busy) begin
      x_q <= x;
      y_q <= y;
    end
  end

  for (genvar k = 0; k < K; k++) begin : g_sng
    tlb_sng #(.DATA_W(DATA_W), .SEED(seed_of(16'(k), 16'hACE1, 16'h1F35)), .REVERSE(1'b0)) u_sng_x (
      .clk, .rst_n, .restart(start && !busy), .en(main_tick), .value(x_q[k]), .bit_o(xs[k])
    );
    tlb_sng #(.DATA_W(DATA_W), .SEED(seed_of(16'(k), 16'h5A5B, 16'h2B71)), .REVERSE(1'b1)) u_sng_y (
      .clk, .rst_n, .restart(start && !busy), .en(main_tick), .value(y_q[k]), .bit_o(ys[k])
    );
  end

  sc_inner_product #(.K(K), .M(M)) u_core (
    .clk, .rst_n, .clear(start && !busy), .run(busy),
    .x(xs), .y(ys), .flip_p, .flip_n,
    .main_tick, .z(z_tlb), .z_valid, .overflow(core_ovf)
  );

  tlb_to_sm u_out_sm (.x(z_tlb), .y(z_sm));

  // Count the output bits produced after main edges 2 .. L+1 of the run;
  // `ticks` already holds the number of main edges seen when z_valid rises.
  assign count_en = busy && z_valid && (ticks >= TW'(3)) && (ticks <= TW'(L + 2));

  tlb_stream_counter #(.W(CNT_W)) u_count (
    .clk, .rst_n, .clear(start && !busy), .en(count_en), .z(z_tlb), .count(result)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      done           <= 1'b0;
      ticks          <= '0;
      overflow_count <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy           <= 1'b1;
        ticks          <= '0;
        overflow_count <= '0;
      end else if (busy) begin
        if (main_tick) ticks <= ticks + 1'b1;
        if (core_ovf && overflow_count != '1) overflow_count <= overflow_count + 1'b1;
        if (z_valid && ticks == TW'(L + 2)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
