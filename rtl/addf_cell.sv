// addf_cell: full adder, the function of the ADDFX1 standard cell.
//
// Used by the GroupSum popcount tree as a 3:2 counter and as the carry chain
// cell of its adders: s = a ^ b ^ ci, co = majority(a, b, ci). Combinational.
module addf_cell (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  assign s  = a ^ b ^ ci;
  assign co = (a & b) | (a & ci) | (b & ci);
endmodule
