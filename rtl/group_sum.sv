// group_sum: the GroupSum output stage. The last LogicLayer's IN_W outputs are
// split into CLASSES contiguous groups of G = IN_W/CLASSES bits, and each group
// is counted by its own popcount_tree; the count is that class's score (logit).
//
// With the paper's 4,000-neuron layers and the 10 MNIST classes each group has
// 400 bits and each score is 9 bits (0..400). Group c is bits
// [c*G, (c+1)*G-1]. The contiguous grouping is this design's choice (the paper
// does not say which outputs go to which class). Training divides the sums by
// a temperature; that constant scale does not change which score is largest,
// so hardware keeps the raw counts. Combinational.
module group_sum
  import dlgn_pkg::*;
#(
  parameter int unsigned IN_W    = NET_WIDTH,
  parameter int unsigned CLASSES = MNIST_CLASSES,
  localparam int unsigned G  = IN_W / CLASSES,
  localparam int unsigned SW = $clog2(G + 1)
) (
  input  logic [IN_W-1:0]              x,
  output logic [CLASSES-1:0][SW-1:0]   score
);

  for (genvar c = 0; c < CLASSES; c++) begin : g_class
    popcount_tree #(.N(G)) u_pop (.x(x[c*G +: G]), .count(score[c]));
  end

  initial begin
    assert (IN_W % CLASSES == 0) else $error("group_sum: IN_W must divide into CLASSES groups");
  end

endmodule
