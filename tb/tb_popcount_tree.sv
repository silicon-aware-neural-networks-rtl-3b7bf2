// tb_popcount_tree: self-checking test of popcount_tree.
//
// Three instances (N = 400 as in GroupSum, N = 7 and N = 3) are driven with
// all-zero, all-one, single-bit and random vectors; each count is compared with
// a loop that adds the bits one at a time. The tree is combinational, so the
// check is made one time step after the inputs change (zero cycles of latency).
module tb_popcount_tree;
  localparam int unsigned N0 = 400, N1 = 7, N2 = 3;

  logic [N0-1:0] x0;
  logic [N1-1:0] x1;
  logic [N2-1:0] x2;
  logic [$clog2(N0+1)-1:0] c0;
  logic [$clog2(N1+1)-1:0] c1;
  logic [$clog2(N2+1)-1:0] c2;

  int checks = 0, failures = 0;

  popcount_tree #(.N(N0)) dut0 (.x(x0), .count(c0));
  popcount_tree #(.N(N1)) dut1 (.x(x1), .count(c1));
  popcount_tree #(.N(N2)) dut2 (.x(x2), .count(c2));

  function automatic int ref_count(logic [N0-1:0] v, int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += int'(v[i]);
    return s;
  endfunction

  task automatic check();
    #1;
    checks += 3;
    if (int'(c0) != ref_count(x0, N0)) begin
      failures++; $display("FAIL N=400 got %0d exp %0d", c0, ref_count(x0, N0));
    end
    if (int'(c1) != ref_count(N0'(x1), N1)) begin
      failures++; $display("FAIL N=7 got %0d exp %0d", c1, ref_count(N0'(x1), N1));
    end
    if (int'(c2) != ref_count(N0'(x2), N2)) begin
      failures++; $display("FAIL N=3 got %0d exp %0d", c2, ref_count(N0'(x2), N2));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x0 = '0; x1 = '0; x2 = '0; check();
    x0 = '1; x1 = '1; x2 = '1; check();
    for (int i = 0; i < N0; i++) begin
      x0 = '0; x0[i] = 1'b1;
      x1 = '0; x1[i % N1] = 1'b1;
      x2 = '0; x2[i % N2] = 1'b1;
      check();
    end
    for (int k = 0; k < 8; k++) begin
      x1 = N1'(k); x2 = N2'(k); x0 = '1; x0[k] = 1'b0; check();
    end
    for (int t = 0; t < 500; t++) begin
      for (int w = 0; w < N0; w += 32) x0[w +: 16] = 16'($urandom);
      for (int w = 16; w < N0; w += 32) x0[w +: 16] = (t % 3 == 0) ? 16'hFFFF : 16'($urandom);
      x1 = N1'($urandom); x2 = N2'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
