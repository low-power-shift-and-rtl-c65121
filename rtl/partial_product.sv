// partial_product: forms the n-bit partial product of one step of the
// multiplication, pp = A when the selected multiplier bit is 1, else 0
// (an AND of every multiplicand bit with that bit). Combinational.
module partial_product
  import lpmul_pkg::*;
#(
  parameter int unsigned N = DEFAULT_WIDTH
) (
  input  logic [N-1:0] a,
  input  logic         b_bit,
  output logic [N-1:0] pp
);
  always_comb begin
    pp = a & {N{b_bit}};
  end
endmodule
