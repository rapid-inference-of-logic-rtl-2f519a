// lgn_layer: one feedforward layer of a logic gate network.
//
// OUT_W nodes work in parallel; node n is a logic_gate whose two inputs are
// bits node_src(LAYER, n, 0/1, IN_W) of the layer input and whose gate is
// node_gate(LAYER, n). Both come from lgn_pkg, so the wiring and the gates are
// fixed at elaboration, exactly as a trained network is after the argmax:
// no multiplier, no memory, no state, only OUT_W two-input gates.
//
// Interface: x (IN_W bits) in, y (OUT_W bits) out, combinational.
//
// Follows the paper: every node reads two inputs and is one of 16 gates; the
// network is feedforward. This design's choice: the wiring and gate choice,
// which in a real deployment are the trained network's and are not published
// (see lgn_pkg for the stand-in rule).
module lgn_layer
  import lgn_pkg::*;
#(
  parameter int unsigned LAYER = 0,
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = 64
) (
  input  logic [IN_W-1:0]  x,
  output logic [OUT_W-1:0] y
);

  for (genvar n = 0; n < OUT_W; n++) begin : g_node
    localparam int unsigned SRC_A = node_src(LAYER, n, 0, IN_W);
    localparam int unsigned SRC_B = node_src(LAYER, n, 1, IN_W);
    logic_gate #(.GATE(node_gate(LAYER, n))) u_gate (
      .a(x[SRC_A]),
      .b(x[SRC_B]),
      .y(y[n])
    );
  end

endmodule
