// logic_gate: one node of a logic gate network at inference time.
//
// During training a node is a softmax-weighted mix of all 16 two-input
// Boolean functions; at inference the paper replaces the softmax by a hard
// argmax, so every node is a single fixed gate. This module is that gate: the
// parameter GATE picks one of the 16 functions (lgn_pkg::gate_e) and the
// output is that function of the two input bits.
//
// Interface: a, b in; y out. Purely combinational, no clock, zero latency.
// Follows the paper: 16 possible gates, two binary inputs, gate fixed after
// training. This design's choice: the numbering of the 16 gates (see lgn_pkg).
module logic_gate
  import lgn_pkg::*;
#(
  parameter gate_e GATE = G_AND
) (
  input  logic a,
  input  logic b,
  output logic y
);

  always_comb begin
    unique case (GATE)
      G_FALSE:      y = 1'b0;
      G_AND:        y = a & b;
      G_A_ANDNOT_B: y = a & ~b;
      G_A:          y = a;
      G_NOTA_AND_B: y = ~a & b;
      G_B:          y = b;
      G_XOR:        y = a ^ b;
      G_OR:         y = a | b;
      G_NOR:        y = ~(a | b);
      G_XNOR:       y = ~(a ^ b);
      G_NOT_B:      y = ~b;
      G_A_ORNOT_B:  y = a | ~b;
      G_NOT_A:      y = ~a;
      G_NOTA_OR_B:  y = ~a | b;
      G_NAND:       y = ~(a & b);
      G_TRUE:       y = 1'b1;
      default:      y = 1'b0;
    endcase
  end

endmodule
