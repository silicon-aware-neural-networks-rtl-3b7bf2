// dlgn_pkg: types, constants and configuration functions shared by the
// logic-gate network.
//
// A differentiable logic gate network (DLGN), once trained and discretised,
// is a plain netlist: every neuron is one of the 16 two-input Boolean
// functions, wired to two outputs of the layer before it. This package holds
//   * gate_e, the 16 functions. The enum value is the gate's truth table as a
//     4-bit number whose bits, MSB first, are the outputs for (A,B) = 00, 01,
//     10, 11. So f(A,B) = g[{~A,~B}]. This is the numbering and the "truth
//     table" column of the paper's cell-mapping table.
//   * the area of each gate in the SkyWater 130 nm Cadence cells the paper maps
//     it to, in units of 0.001 um^2 (a two-cell gate counts both cells).
//   * the network sizes of the paper's MNIST macro (18 layers of 4,000 neurons,
//     GroupSum into the 10 digit classes) and the input size, which is this
//     design's choice (one binary input per 28x28 pixel).
//   * the wiring and gate choice of every neuron. A trained model fixes both;
//     none is published, so here they come from a seeded hash: gate_of() picks
//     a gate uniformly, and wire_pick() wires the A/B input slots of a layer
//     through an affine permutation of its inputs, so that all inputs are used
//     about equally and a neuron never reads the same input twice (the
//     stride and offset of each layer's permutation come from wire_stride()
//     and wire_offset(); wire_src() bundles all three for testbenches). To
//     build a trained model, replace gate_of() and wire_pick() with look-ups
//     into its tables.
// Nothing here has timing: the whole network is combinational.
package dlgn_pkg;

  // Sizes of the MNIST macro.
  localparam int unsigned MNIST_PIXELS  = 784;  // 28 x 28, one bit each (design choice)
  localparam int unsigned MNIST_CLASSES = 10;
  localparam int unsigned NET_LAYERS    = 18;   // paper: 18 LogicLayers
  localparam int unsigned NET_WIDTH     = 4000; // paper: 4,000 neurons each
  localparam logic [31:0] NET_SEED      = 32'h5EED_D1C6;

  // The 16 two-input functions, numbered by their truth table.
  typedef enum logic [3:0] {
    G_ZERO        = 4'b0000,  // 0           TIELO
    G_AND         = 4'b0001,  // A.B         AND2X1
    G_A_ANDN_B    = 4'b0010,  // A.~B        INVX1 + NOR2X1
    G_A           = 4'b0011,  // A           BUFX2
    G_NA_AND_B    = 4'b0100,  // ~A.B        INVX1 + NOR2X1
    G_B           = 4'b0101,  // B           BUFX2
    G_XOR         = 4'b0110,  // A^B         XOR2X1
    G_OR          = 4'b0111,  // A+B         OR2X1
    G_NOR         = 4'b1000,  // ~(A+B)      NOR2X1
    G_XNOR        = 4'b1001,  // ~(A^B)      XNOR2X1
    G_NOT_B       = 4'b1010,  // ~B          INVX1
    G_A_ORN_B     = 4'b1011,  // ~B+A        INVX1 + NAND2X1
    G_NOT_A       = 4'b1100,  // ~A          INVX1
    G_NA_OR_B     = 4'b1101,  // ~A+B        INVX1 + NAND2X1
    G_NAND        = 4'b1110,  // ~(A.B)      NAND2X1
    G_ONE         = 4'b1111   // 1           TIEHI
  } gate_e;

  // Cell area of each gate, 0.001 um^2, indexed by gate_e.
  localparam int unsigned AREA_NM2 [16] = '{
    5713,  9522, 13331,  7618, 13331,  7618, 15235,  9522,
    7618, 15235,  5713, 13331,  5713, 13331,  7618,  5713
  };

  // Reference evaluation of a gate straight from its truth table.
  function automatic logic gate_eval(gate_e g, logic a, logic b);
    logic [3:0] tt;
    tt = g;
    return tt[{~a, ~b}];
  endfunction

  // 32-bit integer hash (xor-shift / multiply mixer).
  function automatic logic [31:0] mix32(logic [31:0] x);
    logic [63:0] p;
    x = x ^ (x >> 16);
    p = 64'(x) * 64'h7FEB_352D;
    x = p[31:0];
    x = x ^ (x >> 15);
    p = 64'(x) * 64'h846C_A68B;
    x = p[31:0];
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int unsigned gcd(int unsigned a, int unsigned b);
    int unsigned t;
    while (b != 0) begin
      t = a % b;
      a = b;
      b = t;
    end
    return a;
  endfunction

  // Per-layer stride of the wiring permutation: coprime with the input width.
  function automatic int unsigned wire_stride(logic [31:0] seed, int unsigned layer,
                                              int unsigned in_w);
    int unsigned s;
    if (in_w < 3) return 1;
    s = 1 + (mix32(seed ^ mix32(32'(layer) * 2 + 1)) % (in_w - 1));
    while (gcd(s, in_w) != 1) s = (s % (in_w - 1)) + 1;
    return s;
  endfunction

  function automatic int unsigned wire_offset(logic [31:0] seed, int unsigned layer,
                                              int unsigned in_w);
    return mix32(seed ^ mix32(32'(layer) * 2)) % in_w;
  endfunction

  // Source index of input slot `slot` (neuron n uses slots 2n for A, 2n+1 for B).
  function automatic int unsigned perm_src(int unsigned slot, int unsigned stride,
                                           int unsigned offset, int unsigned in_w);
    longint unsigned v;
    v = 64'(slot % in_w) * 64'(stride) + 64'(offset) + 64'(slot / in_w);
    return int'(v % 64'(in_w));
  endfunction

  // Input index read by neuron n's A (is_b = 0) or B (is_b = 1) input, given
  // the layer's stride and offset (wire_stride / wire_offset).
  function automatic int unsigned wire_pick(int unsigned n, bit is_b, int unsigned stride,
                                            int unsigned offset, int unsigned in_w);
    int unsigned sa, sb;
    sa = perm_src(2 * n, stride, offset, in_w);
    if (!is_b) return sa;
    sb = perm_src(2 * n + 1, stride, offset, in_w);
    if (sb == sa) sb = (sb + 1) % in_w;
    return sb;
  endfunction

  // The same, computing the layer's stride and offset from seed and layer.
  function automatic int unsigned wire_src(logic [31:0] seed, int unsigned layer,
                                           int unsigned n, bit is_b, int unsigned in_w);
    return wire_pick(n, is_b, wire_stride(seed, layer, in_w), wire_offset(seed, layer, in_w),
                     in_w);
  endfunction

  // Gate of neuron n in layer `layer`.
  function automatic gate_e gate_of(logic [31:0] seed, int unsigned layer, int unsigned n);
    logic [31:0] h;
    h = mix32(seed ^ mix32(32'h9E37_79B9 * 32'(layer + 1) ^ 32'(n)));
    return gate_e'(h[13:10]);
  endfunction

endpackage
