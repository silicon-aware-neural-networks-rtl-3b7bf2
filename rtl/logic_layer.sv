// logic_layer: one LogicLayer of the network, OUT_W logic_neuron gates fed
// from the IN_W outputs of the layer before (or from the binary pixels).
//
// Neuron n reads inputs SRC_A(n) and SRC_B(n) and applies gate GATE(n); all
// three are fixed at elaboration by dlgn_pkg's wiring functions and gate_of
// from SEED and LAYER. In the paper both come from training (the wiring is a
// fixed random pattern chosen before training, the gate the most probable of
// the 16 after it); the trained values are not available, so this design uses
// seeded pseudo-random ones with the same structure: every input is read by
// about 2*OUT_W/IN_W neurons and no neuron reads one input twice.
//
// Interface: x[IN_W] in, y[OUT_W] out. Combinational, no registers: the
// paper lays out the whole network as one combinational macro.
module logic_layer
  import dlgn_pkg::*;
#(
  parameter int unsigned IN_W  = NET_WIDTH,
  parameter int unsigned OUT_W = NET_WIDTH,
  parameter int unsigned LAYER = 0,
  parameter logic [31:0] SEED  = NET_SEED
) (
  input  logic [IN_W-1:0]  x,
  output logic [OUT_W-1:0] y
);

  // Wiring permutation of this layer.
  localparam int unsigned STRIDE = wire_stride(SEED, LAYER, IN_W);
  localparam int unsigned OFFSET = wire_offset(SEED, LAYER, IN_W);

  for (genvar n = 0; n < OUT_W; n++) begin : g_neuron
    localparam int unsigned SRC_A = wire_pick(n, 1'b0, STRIDE, OFFSET, IN_W);
    localparam int unsigned SRC_B = wire_pick(n, 1'b1, STRIDE, OFFSET, IN_W);
    localparam gate_e       GATE  = gate_of(SEED, LAYER, n);

    logic_neuron #(.GATE(GATE)) u_neuron (
      .a(x[SRC_A]),
      .b(x[SRC_B]),
      .y(y[n])
    );
  end

  initial begin
    assert (IN_W >= 2) else $error("logic_layer: a neuron needs two distinct inputs");
  end

endmodule
