// dlgn_ref_pkg: behavioural reference model of the logic-gate network, used by
// the end-to-end testbenches.
//
// dlgn_ref builds, for a given size, the per-neuron wiring and gate tables
// from the configuration functions of dlgn_pkg (the network's "weights") and
// then evaluates an image layer by layer with plain loops: each gate is read
// from its truth-table number with (A,B) = 00 selecting the MSB, and each
// class score is a loop that adds the bits of its contiguous group. It shares
// no code with the RTL gates or adder tree. While it runs it counts how often
// each gate type saw each input pair (A,B) and how often each class won.
package dlgn_ref_pkg;
  import dlgn_pkg::*;

  class dlgn_ref;
    int unsigned in_bits, layers, width, classes;
    int unsigned src_a [][];
    int unsigned src_b [][];
    logic [3:0]  gate  [][];
    longint      gate_ab_hits [16][4];
    longint      gate_used [16];
    longint      class_wins [];

    function new(int unsigned in_bits_, int unsigned layers_, int unsigned width_,
                 int unsigned classes_, logic [31:0] seed);
      in_bits = in_bits_; layers = layers_; width = width_; classes = classes_;
      src_a = new[layers]; src_b = new[layers]; gate = new[layers];
      for (int l = 0; l < int'(layers); l++) begin
        int unsigned iw = (l == 0) ? in_bits : width;
        src_a[l] = new[width]; src_b[l] = new[width]; gate[l] = new[width];
        for (int n = 0; n < int'(width); n++) begin
          src_a[l][n] = wire_src(seed, l, n, 1'b0, iw);
          src_b[l][n] = wire_src(seed, l, n, 1'b1, iw);
          gate[l][n]  = gate_of(seed, l, n);
        end
      end
      foreach (gate_ab_hits[g, k]) gate_ab_hits[g][k] = 0;
      foreach (gate_used[g]) gate_used[g] = 0;
      for (int l = 0; l < int'(layers); l++)
        for (int n = 0; n < int'(width); n++) gate_used[gate[l][n]]++;
      class_wins = new[classes];
      foreach (class_wins[c]) class_wins[c] = 0;
    endfunction

    // Evaluates one image; score[c] gets the popcount of class c's group.
    function void run(const ref logic pix [], ref int score []);
      logic cur [];
      logic nxt [];
      int g_sz, best;
      cur = new[in_bits];
      foreach (pix[i]) cur[i] = pix[i];
      for (int l = 0; l < int'(layers); l++) begin
        nxt = new[width];
        for (int n = 0; n < int'(width); n++) begin
          logic a, b;
          int k;
          a = cur[src_a[l][n]];
          b = cur[src_b[l][n]];
          k = 2 * int'(a) + int'(b);
          nxt[n] = gate[l][n][3 - k];
          gate_ab_hits[gate[l][n]][k]++;
        end
        cur = nxt;
      end
      g_sz = int'(width / classes);
      score = new[classes];
      best = 0;
      for (int c = 0; c < int'(classes); c++) begin
        score[c] = 0;
        for (int i = 0; i < g_sz; i++) score[c] += int'(cur[c * g_sz + i]);
        if (score[c] > score[best]) best = c;
      end
      class_wins[best]++;
    endfunction
  endclass

  // Synthetic 28x28 binary image: kind 0 = random pixels of density dens/16,
  // kind 1 = a few random horizontal and vertical strokes (digit-like).
  function automatic void make_image(int kind, int dens, int unsigned n_pix, ref logic pix []);
    pix = new[n_pix];
    foreach (pix[i]) pix[i] = 1'b0;
    if (kind == 0) begin
      foreach (pix[i]) pix[i] = ($urandom % 16) < dens;
    end else begin
      int strokes = 2 + ($urandom % 4);
      for (int s = 0; s < strokes; s++) begin
        int r0 = 4 + ($urandom % 20), c0 = 4 + ($urandom % 20), len = 5 + ($urandom % 12);
        bit vert = $urandom % 2;
        for (int k = 0; k < len; k++) begin
          int r = vert ? r0 + k - len / 2 : r0;
          int c = vert ? c0 : c0 + k - len / 2;
          if (r >= 0 && r < 28 && c >= 0 && c < 28 && r * 28 + c < int'(n_pix)) pix[r * 28 + c] = 1'b1;
        end
      end
    end
  endfunction
endpackage
