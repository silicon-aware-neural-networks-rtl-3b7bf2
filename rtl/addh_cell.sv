// addh_cell: half adder, the function of the ADDHX1 standard cell.
//
// The GroupSum popcount tree of the network is built from half and full adder
// cells only. This is the half adder: s = a ^ b, co = a & b. Combinational.
module addh_cell (
  input  logic a,
  input  logic b,
  output logic s,
  output logic co
);
  assign s  = a ^ b;
  assign co = a & b;
endmodule
