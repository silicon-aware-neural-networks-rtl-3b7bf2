// tb_ripple_adder: checks ripple_adder for equal widths (WA = WB = 4,
// exhaustive) and unequal widths (WA = 9, WB = 3, exhaustive) against the
// integer sum. Combinational: results are sampled one time step later.
module tb_ripple_adder;
  logic [3:0] a4, b4;
  logic [4:0] s4;
  logic [8:0] a9;
  logic [2:0] b3;
  logic [9:0] s9;
  int checks = 0, failures = 0;

  ripple_adder #(.WA(4), .WB(4)) dut_eq (.a(a4), .b(b4), .sum(s4));
  ripple_adder #(.WA(9), .WB(3)) dut_ne (.a(a9), .b(b3), .sum(s9));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a9 = '0; b3 = '0;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i); b4 = 4'(j);
        #1;
        checks++;
        if (int'(s4) != i + j) begin
          failures++; $display("FAIL 4+4: %0d + %0d = %0d", i, j, s4);
        end
      end
    for (int i = 0; i < 512; i++)
      for (int j = 0; j < 8; j++) begin
        a9 = 9'(i); b3 = 3'(j);
        #1;
        checks++;
        if (int'(s9) != i + j) begin
          failures++; $display("FAIL 9+3: %0d + %0d = %0d", i, j, s9);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
