// tb_addh_cell: exhaustive check of the half adder against a + b.
module tb_addh_cell;
  logic a, b, s, co;
  int checks = 0, failures = 0;

  addh_cell dut (.a(a), .b(b), .s(s), .co(co));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      #1;
      checks++;
      if ({co, s} != 2'(int'(a) + int'(b))) begin
        failures++;
        $display("FAIL a=%b b=%b -> co=%b s=%b", a, b, co, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
