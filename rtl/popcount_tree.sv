// popcount_tree: counts the ones among N bits with a binary tree of adders made
// only of ADDHX1/ADDFX1 cells (addh_cell, addf_cell), as GroupSum needs for
// each class.
//
// Level 0 cuts the N bits into L0 = ceil(N/3) groups of three and counts each
// with one full adder used as a 3:2 counter (a last group of two uses a half
// adder, of one a wire), giving 2-bit counts. Each further level adds the
// counts of the level below in pairs with a ripple_adder, one bit wider per
// level; an odd count left over is passed up unchanged. After $clog2(L0)
// levels one count is left, and its low $clog2(N+1) bits are the result. For
// N = 400: 133 full-adder leaves plus one single-bit leaf, and 8 adder levels.
//
// The paper gives the cells and the words "popcount binary adder tree"; the
// 3-bit leaves and the pairwise levels are this design's choice. The top
// count can be wider than $clog2(N+1) bits; since the total never exceeds N,
// those extra top bits are always 0 and are left unused.
// Combinational; depth grows as log2(N) ripple adders.
module popcount_tree #(
  parameter int unsigned N = 400
) (
  input  logic [N-1:0]              x,
  output logic [$clog2(N+1)-1:0]    count
);

  localparam int unsigned W  = $clog2(N + 1);
  localparam int unsigned L0 = (N + 2) / 3;   // leaf count
  localparam int unsigned LV = $clog2(L0);    // adder levels above the leaves

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    localparam int unsigned M  = (L0 + (1 << l) - 1) >> l;  // counts at this level
    localparam int unsigned WL = 2 + l;                       // their width
    logic [WL-1:0] v [M];

    if (l == 0) begin : g_leaves
      for (genvar j = 0; j < M; j++) begin : g_leaf
        localparam int unsigned NB = (3 * j + 3 <= N) ? 3 : N - 3 * j;
        if (NB == 3) begin : g_fa
          addf_cell u_fa (.a(x[3*j]), .b(x[3*j+1]), .ci(x[3*j+2]), .s(v[j][0]), .co(v[j][1]));
        end else if (NB == 2) begin : g_ha
          addh_cell u_ha (.a(x[3*j]), .b(x[3*j+1]), .s(v[j][0]), .co(v[j][1]));
        end else begin : g_wire
          assign v[j] = {1'b0, x[3*j]};
        end
      end
    end else begin : g_adders
      localparam int unsigned MP = (L0 + (1 << (l - 1)) - 1) >> (l - 1);  // counts below
      for (genvar j = 0; j < M; j++) begin : g_node
        if (2 * j + 1 < MP) begin : g_add
          ripple_adder #(.WA(WL - 1), .WB(WL - 1)) u_add (
            .a(g_lvl[l-1].v[2*j]), .b(g_lvl[l-1].v[2*j+1]), .sum(v[j])
          );
        end else begin : g_pass
          assign v[j] = {1'b0, g_lvl[l-1].v[2*j]};
        end
      end
    end
  end

  assign count = g_lvl[LV].v[0][W-1:0];

endmodule
