// logic_neuron: one neuron of a discretised logic gate network.
//
// After training, each neuron keeps the single two-input function it learned
// with the highest probability, so in silicon it is one small gate. GATE picks
// the function (dlgn_pkg::gate_e, numbered by truth table). The generate case
// below builds each function from the SkyWater 130 nm cells the paper assigns
// to it: one cell for most, and an INVX1 in front of a NOR2X1 or NAND2X1 for
// the four functions with one inverted input (A.~B, ~A.B, ~B+A, ~A+B). BUFX2 is
// a plain connection here and TIELO/TIEHI are constants. Which input of those
// two-cell gates gets the inverter is fixed by the function itself.
//
// The constant gates ignore both inputs and the single-input gates (A, B, ~A,
// ~B) ignore one, exactly as their cells have fewer inputs; lint reports those
// ports as unused for such instances. This follows the paper's mapping table.
//
// Interface: a, b in; y out. Purely combinational, no clock.
module logic_neuron
  import dlgn_pkg::*;
#(
  parameter gate_e GATE = G_AND
) (
  input  logic a,
  input  logic b,
  output logic y
);

  if (GATE == G_ZERO) begin : g_tielo
    assign y = 1'b0;                       // TIELO
  end else if (GATE == G_AND) begin : g_and2
    assign y = a & b;                      // AND2X1
  end else if (GATE == G_A_ANDN_B) begin : g_inv_nor2_a
    logic a_n;
    assign a_n = ~a;                       // INVX1
    assign y   = ~(a_n | b);               // NOR2X1
  end else if (GATE == G_A) begin : g_buf_a
    assign y = a;                          // BUFX2
  end else if (GATE == G_NA_AND_B) begin : g_inv_nor2_b
    logic b_n;
    assign b_n = ~b;                       // INVX1
    assign y   = ~(a | b_n);               // NOR2X1
  end else if (GATE == G_B) begin : g_buf_b
    assign y = b;                          // BUFX2
  end else if (GATE == G_XOR) begin : g_xor2
    assign y = a ^ b;                      // XOR2X1
  end else if (GATE == G_OR) begin : g_or2
    assign y = a | b;                      // OR2X1
  end else if (GATE == G_NOR) begin : g_nor2
    assign y = ~(a | b);                   // NOR2X1
  end else if (GATE == G_XNOR) begin : g_xnor2
    assign y = ~(a ^ b);                   // XNOR2X1
  end else if (GATE == G_NOT_B) begin : g_inv_b
    assign y = ~b;                         // INVX1
  end else if (GATE == G_A_ORN_B) begin : g_inv_nand2_a
    logic a_n;
    assign a_n = ~a;                       // INVX1
    assign y   = ~(a_n & b);               // NAND2X1
  end else if (GATE == G_NOT_A) begin : g_inv_a
    assign y = ~a;                         // INVX1
  end else if (GATE == G_NA_OR_B) begin : g_inv_nand2_b
    logic b_n;
    assign b_n = ~b;                       // INVX1
    assign y   = ~(a & b_n);               // NAND2X1
  end else if (GATE == G_NAND) begin : g_nand2
    assign y = ~(a & b);                   // NAND2X1
  end else begin : g_tiehi
    assign y = 1'b1;                       // TIEHI
  end

endmodule
