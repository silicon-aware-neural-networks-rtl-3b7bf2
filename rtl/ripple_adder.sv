// ripple_adder: adds two unsigned partial counts using only ADDHX1/ADDFX1
// cells (addh_cell, addf_cell); one node of the GroupSum popcount tree.
//
// a is WA bits wide, b is WB <= WA bits; sum = a + b is WA+1 bits. Bit 0 is a
// half adder, bits 1..WB-1 are full adders in a carry chain, and bits WB..WA-1
// are half adders that only absorb the carry. The carry out of the last cell
// is the top sum bit. The paper says only that the popcount tree is made of
// these two cells; ripple carry is this design's choice, being the adder that
// needs nothing else. Combinational.
module ripple_adder #(
  parameter int unsigned WA = 4,
  parameter int unsigned WB = 4
) (
  input  logic [WA-1:0] a,
  input  logic [WB-1:0] b,
  output logic [WA:0]   sum
);

  logic [WA:1] c;  // c[i] = carry into bit i


  for (genvar i = 0; i < WA; i++) begin : g_bit
    if (i == 0) begin : g_ha0
      addh_cell u_ha (.a(a[i]), .b(b[i]), .s(sum[i]), .co(c[i+1]));
    end else if (i < WB) begin : g_fa
      addf_cell u_fa (.a(a[i]), .b(b[i]), .ci(c[i]), .s(sum[i]), .co(c[i+1]));
    end else begin : g_ha
      addh_cell u_ha (.a(a[i]), .b(c[i]), .s(sum[i]), .co(c[i+1]));
    end
  end

  assign sum[WA] = c[WA];

  initial begin
    assert (WB >= 1 && WB <= WA) else $error("ripple_adder: need 1 <= WB <= WA");
  end

endmodule
