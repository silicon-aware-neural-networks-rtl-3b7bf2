// dlgn_macro: the complete logic-gate-network classifier, the hard macro of
// the paper. A binarised 28x28 image goes through LAYERS LogicLayers of WIDTH
// two-input gates each and then GroupSum, which outputs one popcount per class.
//
// Defaults are the paper's MNIST macro: 18 layers of 4,000 neurons (72,000
// gates) and 10 classes of 400 outputs each, scores 0..400. Layer 0 reads the
// IN_BITS pixels (pixel r*28+c on bit r*28+c; how pixels are binarised is
// left to the source of the image), layers 1..LAYERS-1 read the layer before.
// Each layer's wiring and gates are fixed by SEED and its index (see
// dlgn_pkg). The predicted class is the one with the largest score; the macro
// outputs the scores and leaves that comparison to the user.
//
// Timing: fully combinational, as in the paper, with no clock or handshake.
// The scores are valid one critical-path delay after the pixels settle
// (23.9 ns post-layout in SkyWater 130 nm according to the paper, i.e. up to
// 41.8 M classifications per second).
module dlgn_macro
  import dlgn_pkg::*;
#(
  parameter int unsigned IN_BITS = MNIST_PIXELS,
  parameter int unsigned LAYERS  = NET_LAYERS,
  parameter int unsigned WIDTH   = NET_WIDTH,
  parameter int unsigned CLASSES = MNIST_CLASSES,
  parameter logic [31:0] SEED    = NET_SEED,
  localparam int unsigned SW     = $clog2(WIDTH / CLASSES + 1)
) (
  input  logic [IN_BITS-1:0]          pixels,
  output logic [CLASSES-1:0][SW-1:0]  score
);

  // act[l] is the output of layer l.
  logic [LAYERS-1:0][WIDTH-1:0] act;

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    if (l == 0) begin : g_first
      logic_layer #(.IN_W(IN_BITS), .OUT_W(WIDTH), .LAYER(l), .SEED(SEED)) u_layer (
        .x(pixels), .y(act[l])
      );
    end else begin : g_next
      logic_layer #(.IN_W(WIDTH), .OUT_W(WIDTH), .LAYER(l), .SEED(SEED)) u_layer (
        .x(act[l-1]), .y(act[l])
      );
    end
  end

  group_sum #(.IN_W(WIDTH), .CLASSES(CLASSES)) u_group_sum (
    .x(act[LAYERS-1]), .score(score)
  );

endmodule
