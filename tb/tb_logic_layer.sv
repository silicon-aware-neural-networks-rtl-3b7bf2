// tb_logic_layer: checks two logic_layer instances, a first layer (784 pixel
// inputs to 4,000 neurons, the paper's first LogicLayer) and a small inner one
// (37 inputs to 64 neurons).
//
// For every neuron the testbench takes the wiring and gate the configuration
// functions assign (dlgn_pkg::wire_src / gate_of) and evaluates the gate itself
// from its truth-table number, (A,B) = 00 selecting the MSB. It also checks
// the wiring rules: both sources in range, A != B, and every input read by
// floor or ceil(2*OUT_W/IN_W) neurons. Inputs are all-zero, all-one and random.
module tb_logic_layer;
  import dlgn_pkg::*;

  localparam int unsigned IA = 784, OA = 4000, LA = 0;
  localparam int unsigned IB = 37,  OB = 64,   LB = 5;

  logic [IA-1:0] xa;
  logic [OA-1:0] ya;
  logic [IB-1:0] xb;
  logic [OB-1:0] yb;

  int checks = 0, failures = 0;
  int unsigned sa_a [OA], sb_a [OA], sa_b [OB], sb_b [OB];
  logic [3:0]  ga [OA], gb [OB];

  logic_layer #(.IN_W(IA), .OUT_W(OA), .LAYER(LA)) dut_a (.x(xa), .y(ya));
  logic_layer #(.IN_W(IB), .OUT_W(OB), .LAYER(LB)) dut_b (.x(xb), .y(yb));

  function automatic logic tt_eval(logic [3:0] tt, logic a, logic b);
    int idx = 3 - (2 * int'(a) + int'(b));
    return tt[idx];
  endfunction

  task automatic check_wiring(string nm, int unsigned in_w, int unsigned out_w,
                              const ref int unsigned sa [], const ref int unsigned sb []);
    int uses [];
    int lo, hi;
    uses = new[in_w];
    foreach (uses[i]) uses[i] = 0;
    for (int n = 0; n < int'(out_w); n++) begin
      checks++;
      if (sa[n] >= in_w || sb[n] >= in_w || sa[n] == sb[n]) begin
        failures++; $display("FAIL %s neuron %0d wiring %0d/%0d", nm, n, sa[n], sb[n]);
      end else begin
        uses[sa[n]]++; uses[sb[n]]++;
      end
    end
    lo = (2 * out_w) / in_w;
    hi = (2 * out_w + in_w - 1) / in_w;
    for (int i = 0; i < int'(in_w); i++) begin
      // A collision moves one B slot to the next input, so allow one more.
      checks++;
      if (uses[i] < lo - 1 || uses[i] > hi + 1) begin
        failures++; $display("FAIL %s input %0d used %0d times", nm, i, uses[i]);
      end
    end
  endtask

  task automatic check_outputs();
    #1;
    for (int n = 0; n < int'(OA); n++) begin
      checks++;
      if (ya[n] !== tt_eval(ga[n], xa[sa_a[n]], xa[sb_a[n]])) begin
        failures++;
        if (failures < 10) $display("FAIL A neuron %0d gate %b", n, ga[n]);
      end
    end
    for (int n = 0; n < int'(OB); n++) begin
      checks++;
      if (yb[n] !== tt_eval(gb[n], xb[sa_b[n]], xb[sb_b[n]])) begin
        failures++;
        if (failures < 10) $display("FAIL B neuron %0d gate %b", n, gb[n]);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int gate_seen [16];
    int unsigned dsa [], dsb [];
    foreach (gate_seen[g]) gate_seen[g] = 0;
    for (int n = 0; n < int'(OA); n++) begin
      sa_a[n] = wire_src(NET_SEED, LA, n, 1'b0, IA);
      sb_a[n] = wire_src(NET_SEED, LA, n, 1'b1, IA);
      ga[n]   = gate_of(NET_SEED, LA, n);
      gate_seen[ga[n]]++;
    end
    for (int n = 0; n < int'(OB); n++) begin
      sa_b[n] = wire_src(NET_SEED, LB, n, 1'b0, IB);
      sb_b[n] = wire_src(NET_SEED, LB, n, 1'b1, IB);
      gb[n]   = gate_of(NET_SEED, LB, n);
    end
    dsa = new[OA]; dsb = new[OA];
    foreach (dsa[n]) begin dsa[n] = sa_a[n]; dsb[n] = sb_a[n]; end
    check_wiring("A", IA, OA, dsa, dsb);
    dsa = new[OB]; dsb = new[OB];
    foreach (dsa[n]) begin dsa[n] = sa_b[n]; dsb[n] = sb_b[n]; end
    check_wiring("B", IB, OB, dsa, dsb);
    for (int g = 0; g < 16; g++) begin
      checks++;
      if (gate_seen[g] == 0) begin
        failures++; $display("FAIL gate %0d never chosen in 4000 neurons", g);
      end
    end

    xa = '0; xb = '0; check_outputs();
    xa = '1; xb = '1; check_outputs();
    for (int t = 0; t < 20; t++) begin
      for (int w = 0; w < int'(IA); w += 16) xa[w +: 16] = 16'($urandom);
      xb = IB'({$urandom, $urandom});
      check_outputs();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
