// bit_width_control: limits how many bits of a word take part in step k of
// the multiplication, k being the position of the ring counter's one-hot
// token `pos` (pos[k] = 1, k = 0 .. N-1). In step k the running product is
// less than 2^(N+k), the partial product aligned by k places fits N+k bits
// and their sum fits N+k+1 bits, so the bits above are held at zero and do
// not toggle.
//
//   out = ((SHIFT ? in << k : in) & mask)[OUT_W-1:0],
//   mask has its KEEP_BASE + k low bits set.
//
// The multiplier uses three instances: the partial-product aligner
// (SHIFT = 1, N -> 2N-1 bits, keeps N+k bits), the adder-input limiter for
// the feeder register (keeps N+k bits) and the adder-output limiter (keeps
// N+k+1 bits). `mask` is also an output: the registers that take the
// result load only those bits. Combinational.
// The widths per step follow the published design; doing the alignment
// with a one-hot-controlled OR of shifted copies is this design's choice.
module bit_width_control
  import lpmul_pkg::*;
#(
  parameter int unsigned N         = DEFAULT_WIDTH,
  parameter int unsigned IN_W      = DEFAULT_WIDTH,
  parameter int unsigned OUT_W     = 2 * DEFAULT_WIDTH - 1,
  parameter bit          SHIFT     = 1'b1,
  parameter int unsigned KEEP_BASE = DEFAULT_WIDTH
) (
  input  logic [IN_W-1:0]  data_in,
  input  logic [N-1:0]     pos,
  output logic [OUT_W-1:0] data_out,
  output logic [OUT_W-1:0] mask
);
  localparam int unsigned WW = (IN_W + N > OUT_W) ? IN_W + N : OUT_W;

  logic [WW-1:0] wide_in;
  logic [WW-1:0] aligned;
  logic [WW-1:0] wide_mask;

  always_comb begin
    wide_in   = WW'(data_in);
    aligned   = '0;
    wide_mask = '0;
    for (int unsigned j = 0; j < N; j++) begin
      if (pos[j]) begin
        aligned   |= SHIFT ? (wide_in << j) : wide_in;
        wide_mask |= (WW'(1) << (KEEP_BASE + j)) - WW'(1);
      end
    end
    mask     = wide_mask[OUT_W-1:0];
    data_out = aligned[OUT_W-1:0] & mask;
  end
endmodule
