// tb_dlgn_macro: end-to-end test of the classifier at a reduced size
// (784 pixels, 4 LogicLayers of 400 neurons, 10 classes of 40) so that many
// images can be run.
//
// Each image (random densities and digit-like strokes) is applied to the
// pixels; one time step later, with no clock (the macro is combinational, so
// its latency is zero cycles), all ten scores are compared with the reference
// model of dlgn_ref_pkg. Coverage of the mechanisms is counted and a failure
// is counted for any that never happened: every one of the 16 gate functions
// present and exercised with all four input pairs, every class score taking
// at least two different values.
module tb_dlgn_macro;
  import dlgn_pkg::*;
  import dlgn_ref_pkg::*;

  localparam int unsigned IN_BITS = 784, LAYERS = 4, WIDTH = 400, CLASSES = 10;
  localparam int unsigned G = WIDTH / CLASSES, SW = $clog2(G + 1);
  localparam int unsigned IMAGES = 300;

  logic [IN_BITS-1:0] pixels;
  logic [CLASSES-1:0][SW-1:0] score;
  int checks = 0, failures = 0;

  dlgn_macro #(.IN_BITS(IN_BITS), .LAYERS(LAYERS), .WIDTH(WIDTH), .CLASSES(CLASSES)) dut (
    .pixels(pixels), .score(score)
  );

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dlgn_ref m;
    logic pix [];
    int exp_s [];
    int s_min [CLASSES], s_max [CLASSES];

    m = new(IN_BITS, LAYERS, WIDTH, CLASSES, NET_SEED);
    foreach (s_min[c]) begin s_min[c] = G + 1; s_max[c] = -1; end

    for (int t = 0; t < int'(IMAGES); t++) begin
      if (t == 0)      begin pix = new[IN_BITS]; foreach (pix[i]) pix[i] = 1'b0; end
      else if (t == 1) begin pix = new[IN_BITS]; foreach (pix[i]) pix[i] = 1'b1; end
      else make_image(t % 2, t % 17, IN_BITS, pix);
      foreach (pix[i]) pixels[i] = pix[i];
      m.run(pix, exp_s);
      #1;
      for (int c = 0; c < int'(CLASSES); c++) begin
        checks++;
        if (int'(score[c]) != exp_s[c]) begin
          failures++;
          if (failures < 10) $display("FAIL image %0d class %0d score %0d exp %0d", t, c, score[c], exp_s[c]);
        end
        if (int'(score[c]) < s_min[c]) s_min[c] = int'(score[c]);
        if (int'(score[c]) > s_max[c]) s_max[c] = int'(score[c]);
      end
      #1;
    end

    // Cell area of the configured network (sum of the mapping-table areas).
    begin
      longint area = 0;
      for (int g = 0; g < 16; g++) area += m.gate_used[g] * longint'(AREA_NM2[g]);
      $display("logic area %0d.%03d um^2, %0d.%03d um^2 per neuron", area / 1000, area % 1000,
               area / (LAYERS * WIDTH) / 1000, area / (LAYERS * WIDTH) % 1000);
    end

    // Mechanism coverage.
    for (int g = 0; g < 16; g++) begin
      $display("gate %2d: %0d neurons, input pairs 00/01/10/11 seen %0d/%0d/%0d/%0d times", g,
               m.gate_used[g], m.gate_ab_hits[g][0], m.gate_ab_hits[g][1],
               m.gate_ab_hits[g][2], m.gate_ab_hits[g][3]);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (m.gate_ab_hits[g][k] == 0) begin
          failures++; $display("FAIL gate %0d never saw input pair %0d", g, k);
        end
      end
    end
    for (int c = 0; c < int'(CLASSES); c++) begin
      $display("class %0d: score range %0d..%0d, won %0d times", c, s_min[c], s_max[c], m.class_wins[c]);
      checks++;
      if (s_min[c] == s_max[c]) begin
        failures++; $display("FAIL class %0d score never changed", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
