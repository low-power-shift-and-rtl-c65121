// ring_clock_gate: clock gate shared by one block of the low-power ring
// counter. Its cost does not depend on how many flip-flops the block holds.
//
// One state bit `inside_q` records whether the ring's one-hot token is in
// the block. A 2:1 selector driven by that state picks what the state
// becomes at the next advance:
//   inside_q = 0 : the Entrance input, the flip-flop just before the block
//                  (the token enters when it holds the 1);
//   inside_q = 1 : the Exit input, the block's last flip-flop; the token
//                  leaves when that flip-flop holds the 1, so the state
//                  keeps ~exit_bit.
// The block's flip-flops must be clocked while the token is inside and on
// the advance that brings it in, so
//   clk_en = advance & (inside_q | entrance).
// The selector/state structure follows the published clock-gating circuit;
// the polarity of its Exit input is not given and is chosen here so that
// the state drops when the token leaves. The gated clock is written as a
// clock enable; `rst_n` loads INIT_INSIDE (1 for the block that holds the
// token after reset).
module ring_clock_gate #(
  parameter bit INIT_INSIDE = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic advance,
  input  logic entrance,
  input  logic exit_bit,
  output logic inside_q,
  output logic clk_en
);
  logic inside_d;

  always_comb begin
    inside_d = inside_q ? ~exit_bit : entrance;
    clk_en   = advance & (inside_q | entrance);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       inside_q <= INIT_INSIDE;
    else if (advance) inside_q <= inside_d;
  end
endmodule
