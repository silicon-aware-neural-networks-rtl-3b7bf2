// tb_group_sum: checks group_sum at the paper's size (4,000 inputs, 10 classes
// of 400) and at a small size (30 inputs, 3 classes of 10). Each score is
// compared with the number of ones counted bit by bit in that class's
// contiguous slice; inputs are zero, one, one class full at a time, and random
// with a different density per class.
module tb_group_sum;
  localparam int unsigned IA = 4000, CA = 10, GA = IA / CA, SA = $clog2(GA + 1);
  localparam int unsigned IB = 30,   CB = 3,  GB = IB / CB, SB = $clog2(GB + 1);

  logic [IA-1:0] xa;
  logic [CA-1:0][SA-1:0] sa;
  logic [IB-1:0] xb;
  logic [CB-1:0][SB-1:0] sb;
  int checks = 0, failures = 0;

  group_sum dut_a (.x(xa), .score(sa));
  group_sum #(.IN_W(IB), .CLASSES(CB)) dut_b (.x(xb), .score(sb));

  task automatic check();
    #1;
    for (int c = 0; c < int'(CA); c++) begin
      int e = 0;
      for (int i = 0; i < int'(GA); i++) e += int'(xa[c * GA + i]);
      checks++;
      if (int'(sa[c]) != e) begin
        failures++; $display("FAIL A class %0d score %0d exp %0d", c, sa[c], e);
      end
    end
    for (int c = 0; c < int'(CB); c++) begin
      int e = 0;
      for (int i = 0; i < int'(GB); i++) e += int'(xb[c * GB + i]);
      checks++;
      if (int'(sb[c]) != e) begin
        failures++; $display("FAIL B class %0d score %0d exp %0d", c, sb[c], e);
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
    xa = '0; xb = '0; check();
    xa = '1; xb = '1; check();
    for (int c = 0; c < int'(CA); c++) begin
      xa = '0; xa[c * GA +: GA] = '1;
      xb = '0; xb[(c % CB) * GB +: GB] = '1;
      check();
    end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < int'(IA); i++) xa[i] = ($urandom % 10) < ((i / GA + t) % 10);
      xb = IB'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
