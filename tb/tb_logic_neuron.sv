// tb_logic_neuron: instantiates logic_neuron once for each of the 16 gates and
// drives all four input pairs. The expected output is taken from the truth
// table bit strings of the cell-mapping table, typed in here as text
// ("0001" for AND, ...) and read left to right for (A,B) = 00, 01, 10, 11,
// independently of the gate_e encoding the RTL uses.
module tb_logic_neuron;
  import dlgn_pkg::*;

  // Truth-table column of the mapping table, row i = gate i.
  localparam string TT [16] = '{
    "0000", "0001", "0010", "0011", "0100", "0101", "0110", "0111",
    "1000", "1001", "1010", "1011", "1100", "1101", "1110", "1111"
  };

  logic a, b;
  logic [15:0] y;
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 16; g++) begin : g_dut
    logic_neuron #(.GATE(gate_e'(g))) dut (.a(a), .b(b), .y(y[g]));
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ab = 0; ab < 4; ab++) begin
      {a, b} = 2'(ab);
      #1;
      for (int g = 0; g < 16; g++) begin
        logic exp_y;
        exp_y = (TT[g][ab] == "1");
        checks++;
        if (y[g] !== exp_y) begin
          failures++;
          $display("FAIL gate %0d (%s) a=%b b=%b: y=%b exp %b", g, TT[g], a, b, y[g], exp_y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
