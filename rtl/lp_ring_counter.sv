// lp_ring_counter: N-bit one-hot ring counter with block clock gating.
//
// The token moves from bit j to bit j+1 on every cycle with `advance` = 1,
// and from bit N-1 back to bit 0 (reset value: bit 0 set, as in
// 0..001 -> 0..010 -> ... -> 10..0 -> 0..001). Only two flip-flops change
// per advance, so clocking all N wastes power. The flip-flops are split
// into blocks of BLOCK consecutive bits (the last block may be shorter);
// each block has one ring_clock_gate and its flip-flops load only when
// that gate enables them, i.e. when the token is entering or inside the
// block. With N = 8 and BLOCK = 4 at most 4 of the 8 flip-flops (and
// usually 4) are clocked instead of 8; for wider counters the saving
// grows. `blk_clk_en` exposes each block's enable.
// A counter that is one single block is clocked on every advance.
// The blocked structure and block size follow the published design; the
// split starting at bit 0 and the clock enables standing for gated
// clocks are this design's choices.
module lp_ring_counter
  import lpmul_pkg::*;
#(
  parameter int unsigned N     = DEFAULT_WIDTH,
  parameter int unsigned BLOCK = DEFAULT_RING_BLOCK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      advance,
  output logic [N-1:0]              ring,
  output logic [(N+BLOCK-1)/BLOCK-1:0] blk_clk_en
);
  localparam int unsigned NB = (N + BLOCK - 1) / BLOCK;

  logic [N-1:0] ring_next;
  logic [N-1:0] ff_en;

  // next value of every flip-flop: its predecessor in the ring
  assign ring_next = {ring[N-2:0], ring[N-1]};

  for (genvar m = 0; m < NB; m++) begin : g_blk
    localparam int unsigned LO = m * BLOCK;
    localparam int unsigned HI = ((m + 1) * BLOCK > N) ? N - 1 : (m + 1) * BLOCK - 1;
    localparam int unsigned PREV = (LO == 0) ? N - 1 : LO - 1;

    if (NB == 1) begin : g_single
      assign blk_clk_en[m] = advance;
    end else begin : g_gate
      logic tok_in;
      ring_clock_gate #(.INIT_INSIDE(m == 0)) u_cg (
        .clk     (clk),
        .rst_n   (rst_n),
        .advance (advance),
        .entrance(ring[PREV]),
        .exit_bit(ring[HI]),
        .inside_q(tok_in),
        .clk_en  (blk_clk_en[m])
      );
      // the gate's state must always agree with the block's contents
      a_gate_state: assert property (@(posedge clk) disable iff (!rst_n)
        tok_in == (|ring[HI:LO]))
        else $error("lp_ring_counter: gate state of block %0d is wrong", m);
    end

    assign ff_en[HI:LO] = {(HI - LO + 1){blk_clk_en[m]}};
  end

  for (genvar j = 0; j < N; j++) begin : g_ff
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        ring[j] <= (j == 0);
      else if (ff_en[j]) ring[j] <= ring_next[j];
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(ring))
    else $error("lp_ring_counter: state %b is not one-hot", ring);
endmodule
