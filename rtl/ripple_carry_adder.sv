// ripple_carry_adder: W-bit adder built as a chain of full adders, bit 0
// first, each stage's carry feeding the next (C0 in, C(W) out). A ripple
// chain is used because it has the lowest average number of transitions
// per addition among the common adder structures, which is what matters
// for switching power here; its delay grows linearly with W.
// Interface: a, b (W bits), cin; sum (W bits), cout. Combinational.
// In the multiplier, W = 2n-1 and {cout, sum} is the 2n-bit result.
module ripple_carry_adder
  import lpmul_pkg::*;
#(
  parameter int unsigned W = 2 * DEFAULT_WIDTH - 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_fa
    full_adder u_fa (
      .a (a[i]),
      .b (b[i]),
      .ci(c[i]),
      .s (sum[i]),
      .co(c[i+1])
    );
  end

  assign cout = c[W];
endmodule
