// tb_addf_cell: exhaustive check of the full adder against a + b + ci.
module tb_addf_cell;
  logic a, b, ci, s, co;
  int checks = 0, failures = 0;

  addf_cell dut (.a(a), .b(b), .ci(ci), .s(s), .co(co));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      {a, b, ci} = 3'(i);
      #1;
      checks++;
      if ({co, s} != 2'(int'(a) + int'(b) + int'(ci))) begin
        failures++;
        $display("FAIL a=%b b=%b ci=%b -> co=%b s=%b", a, b, ci, co, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
