// full_adder: one-bit full adder, the cell of the ripple-carry adder.
// s = a ^ b ^ ci, co = majority(a, b, ci). Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  always_comb begin
    s  = a ^ b ^ ci;
    co = (a & b) | (a & ci) | (b & ci);
  end
endmodule
