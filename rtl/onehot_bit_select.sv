// onehot_bit_select: multiplexer with a one-hot bus selector. The ring
// counter's one-hot word `sel` picks one bit of the multiplier `b`
// (sel = 0..001 gives b[0], 0..010 gives b[1], and so on), so the multiplier
// bits are read in turn without ever shifting the multiplier register.
// Each bit is gated by its selector line and the gated bits are ORed, the
// logic equivalent of the pass-transistor bus in the original drawing.
// Combinational. `sel` must be one-hot; the ring counter that drives it
// asserts that property itself.
module onehot_bit_select
  import lpmul_pkg::*;
#(
  parameter int unsigned N = DEFAULT_WIDTH
) (
  input  logic [N-1:0] b,
  input  logic [N-1:0] sel,
  output logic         bit_out
);
  always_comb begin
    bit_out = |(b & sel);
  end
endmodule
