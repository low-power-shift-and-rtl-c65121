// lp_shift_add_multiplier: N x N unsigned shift-and-add multiplier with
// reduced switching activity.
//
// A multiplication takes N steps, one per multiplier bit, k = 0 .. N-1:
//   P(k+1) = P(k) + (B(k) ? A << k : 0),  P(0) = 0,  product = P(N).
// Where a textbook shift-and-add multiplier shifts the multiplier register,
// the product register and a binary counter every cycle, this one
//  - keeps B still and reads bit B(k) through a one-hot selector driven by
//    a ring counter (onehot_bit_select, lp_ring_counter);
//  - clock-gates the ring counter in blocks of RING_BLOCK flip-flops;
//  - keeps the product unshifted and instead aligns the partial product
//    A & B(k) by k places, limiting every word to the bits step k can use
//    (bit_width_control: N+k bits into the adder, N+k+1 out of it);
//  - skips the addition of zero: the running product is kept in a feeder
//    register (drives the adder) or a bypass register (goes around it),
//    chosen by the next multiplier bit (feeder_bypass);
//  - adds in a ripple-carry adder of 2N-1 bits (ripple_carry_adder).
//
// The ring counter runs one position ahead of the step: in step k its
// token is at k+1 (mod N) and the selector returns the next bit B(k+1),
// while B(k) sits in the flip-flop b_now_q. Rotating the token one place
// back (wiring only) gives the one-hot step position k used by the
// bit-width control. The step with the token back at bit 0 is the last
// one, so the ring counter also counts the steps and ends each
// multiplication where the next one starts.
//
// Interface and timing: when idle (busy = 0) a cycle with start = 1
// captures a and b, clears the feeder and bypass registers, loads B(0) and
// moves the token to bit 1. N busy cycles follow (steps 0..N-1); at the end
// of the last one `product` is loaded, busy falls and done is 1 for one
// cycle. Latency: product and done are valid N clock edges after the edge
// that takes start (N+1 cycles per product counting the start cycle); a new
// start is accepted in the cycle done is high. start is
// ignored while busy. `product` holds its value until the next result.
// The step structure and the blocks follow the published architecture;
// the start/busy/done handshake, the look-ahead timing of the ring counter
// and the operand registers are this design's choices.
module lp_shift_add_multiplier
  import lpmul_pkg::*;
#(
  parameter int unsigned N          = DEFAULT_WIDTH,
  parameter int unsigned RING_BLOCK = DEFAULT_RING_BLOCK
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic           busy,
  output logic           done,
  output logic [2*N-1:0] product
);
  localparam int unsigned NB = (N + RING_BLOCK - 1) / RING_BLOCK;

  logic [N-1:0]   a_q, b_q;
  logic           busy_q, done_q, b_now_q;
  logic           accept, last, advance, store;

  logic [N-1:0]   ring, pos;
  logic [NB-1:0]  ring_blk_en;
  logic           b_next;

  logic [N-1:0]   pp;
  logic [2*N-2:0] pp_aligned, pp_mask;
  logic [2*N-2:0] feed_in, feed_mask;
  logic [2*N-2:0] add_sum;
  logic           add_cout;
  logic [2*N-1:0] sum_ctl, sum_mask;
  logic [2*N-1:0] feeder_q, bypass_q, cur;
  logic           feeder_en, bypass_en;

  // ---------------- control ----------------
  always_comb begin
    accept  = start & ~busy_q;
    last    = busy_q & ring[0];
    advance = accept | (busy_q & ~ring[0]);
    store   = busy_q & ~ring[0];
    pos     = {ring[0], ring[N-1:1]};   // step position k = token - 1
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q     <= '0;
      b_q     <= '0;
      b_now_q <= 1'b0;
      busy_q  <= 1'b0;
      done_q  <= 1'b0;
      product <= '0;
    end else begin
      done_q <= last;
      if (accept) begin
        a_q     <= a;
        b_q     <= b;
        b_now_q <= b[0];
        busy_q  <= 1'b1;
      end else if (busy_q) begin
        b_now_q <= b_next;
        if (last) begin
          busy_q  <= 1'b0;
          product <= cur;
        end
      end
    end
  end

  assign busy = busy_q;
  assign done = done_q;

  // ---------------- multiplier bit selection ----------------
  lp_ring_counter #(.N(N), .BLOCK(RING_BLOCK)) u_ring (
    .clk       (clk),
    .rst_n     (rst_n),
    .advance   (advance),
    .ring      (ring),
    .blk_clk_en(ring_blk_en)
  );

  onehot_bit_select #(.N(N)) u_bsel (
    .b      (b_q),
    .sel    (ring),
    .bit_out(b_next)
  );

  // ---------------- datapath ----------------
  partial_product #(.N(N)) u_pp (
    .a    (a_q),
    .b_bit(b_now_q),
    .pp   (pp)
  );

  bit_width_control #(
    .N(N), .IN_W(N), .OUT_W(2*N-1), .SHIFT(1'b1), .KEEP_BASE(N)
  ) u_bwc_pp (
    .data_in (pp),
    .pos     (pos),
    .data_out(pp_aligned),
    .mask    (pp_mask)
  );

  bit_width_control #(
    .N(N), .IN_W(2*N), .OUT_W(2*N-1), .SHIFT(1'b0), .KEEP_BASE(N)
  ) u_bwc_feed (
    .data_in (feeder_q),
    .pos     (pos),
    .data_out(feed_in),
    .mask    (feed_mask)
  );

  ripple_carry_adder #(.W(2*N-1)) u_add (
    .a   (feed_in),
    .b   (pp_aligned),
    .cin (1'b0),
    .sum (add_sum),
    .cout(add_cout)
  );

  bit_width_control #(
    .N(N), .IN_W(2*N), .OUT_W(2*N), .SHIFT(1'b0), .KEEP_BASE(N+1)
  ) u_bwc_sum (
    .data_in ({add_cout, add_sum}),
    .pos     (pos),
    .data_out(sum_ctl),
    .mask    (sum_mask)
  );

  feeder_bypass #(.W(2*N)) u_fb (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (accept),
    .store    (store),
    .b_now    (b_now_q),
    .b_next   (b_next),
    .sum      (sum_ctl),
    .load_mask(sum_mask),
    .feeder_q (feeder_q),
    .bypass_q (bypass_q),
    .cur      (cur),
    .feeder_en(feeder_en),
    .bypass_en(bypass_en)
  );

  // pp_mask and feed_mask equal the N+k data width by construction; only
  // the adder-output mask is needed to limit the register loads. The
  // bypass register and the clock enables are observed only by testbenches.
  logic unused_obs;
  assign unused_obs = ^{pp_mask, feed_mask, bypass_q, feeder_en, bypass_en, ring_blk_en};
endmodule
