// full_adder: one-bit full adder, the cell of every ripple carry adder and
// of the column compression tree. sum = a ^ b ^ ci, co = majority(a, b, ci).
// Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  assign s  = a ^ b ^ ci;
  assign co = (a & b) | (a & ci) | (b & ci);
endmodule
