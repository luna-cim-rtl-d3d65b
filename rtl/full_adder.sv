// full_adder: 1-bit full adder, s = a ^ b ^ ci, co = majority(a, b, ci).
// Combinational.
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
