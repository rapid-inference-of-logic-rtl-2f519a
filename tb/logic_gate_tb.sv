// logic_gate_tb: builds one logic_gate for each of the 16 gate codes and
// drives all four input combinations into each, comparing every output with
// the gate's truth table (lgn_ref_pkg::ref_gate). 64 checks.
module logic_gate_tb;
  import lgn_pkg::*;
  import lgn_ref_pkg::*;

  logic        a, b;
  logic [15:0] y;
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 16; g++) begin : g_dut
    logic_gate #(.GATE(gate_e'(g))) u_dut (.a(a), .b(b), .y(y[g]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ab = 0; ab < 4; ab++) begin
      a = ab[1];
      b = ab[0];
      #1;
      for (int g = 0; g < 16; g++) begin
        checks++;
        if (y[g] !== ref_gate(4'(g), a, b)) begin
          failures++;
          $display("FAIL gate %0d a=%0b b=%0b: got %0b", g, a, b, y[g]);
        end
      end
    end
    // Named spot checks of the encoding.
    a = 1; b = 1; #1;
    checks++; if (y[G_AND] !== 1'b1 || y[G_NAND] !== 1'b0 || y[G_XOR] !== 1'b0) failures++;
    a = 1; b = 0; #1;
    checks++; if (y[G_A_ANDNOT_B] !== 1'b1 || y[G_NOTA_OR_B] !== 1'b0 || y[G_OR] !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
