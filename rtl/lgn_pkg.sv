// lgn_pkg: types and constants shared by the logic-gate-network (LGN)
// anomaly-detection pipeline.
//
// What it holds:
//   * gate_e, the 16 two-input Boolean functions a node can take. The paper
//     says only that each node picks "one of 16 possible two-input Boolean
//     logic gates"; the numbering below is this design's choice. It is the
//     usual one for differentiable logic gate networks: the 4-bit code is the
//     truth table, bit {~a,~b} of the code giving the output for inputs a,b
//     (so code 1 = AND, 6 = XOR, 7 = OR, 14 = NAND).
//   * The network's default shape. The image size (18 x 14 pixels) and the
//     example thermometer thresholds {10, 20, 30} are the paper's; pixel width,
//     layer count and widths are this design's assumptions.
//   * The network's "trained configuration": which gate every node holds and
//     which two bits of the previous layer it reads. The paper does not publish
//     a trained network, so these come from two deterministic functions,
//     node_gate() and node_src(), evaluated at elaboration time. A trained
//     network is dropped in by replacing the bodies of those two functions
//     (e.g. with a case table) without touching any module.
package lgn_pkg;

  // ---------------------------------------------------------------- gates
  typedef enum logic [3:0] {
    G_FALSE      = 4'd0,   // 0
    G_AND        = 4'd1,   // a & b
    G_A_ANDNOT_B = 4'd2,   // a & ~b
    G_A          = 4'd3,   // a
    G_NOTA_AND_B = 4'd4,   // ~a & b
    G_B          = 4'd5,   // b
    G_XOR        = 4'd6,   // a ^ b
    G_OR         = 4'd7,   // a | b
    G_NOR        = 4'd8,   // ~(a | b)
    G_XNOR       = 4'd9,   // ~(a ^ b)
    G_NOT_B      = 4'd10,  // ~b
    G_A_ORNOT_B  = 4'd11,  // a | ~b
    G_NOT_A      = 4'd12,  // ~a
    G_NOTA_OR_B  = 4'd13,  // ~a | b
    G_NAND       = 4'd14,  // ~(a & b)
    G_TRUE       = 4'd15   // 1
  } gate_e;

  // ---------------------------------------------------------------- image
  localparam int unsigned IMG_ROWS = 18;   // paper: 18 x 14 calorimeter image
  localparam int unsigned IMG_COLS = 14;
  localparam int unsigned N_PIX    = IMG_ROWS * IMG_COLS;  // 252
  localparam int unsigned PIX_W    = 10;   // assumed pixel (region E_T) width

  // Thermometer thresholds: the paper's own example T = {10, 20, 30}.
  localparam int unsigned N_THR = 3;
  typedef logic [PIX_W-1:0] pix_t;
  localparam pix_t THRESH_DEFAULT [N_THR] = '{pix_t'(10), pix_t'(20), pix_t'(30)};

  // ---------------------------------------------------------------- network
  localparam int unsigned NUM_LAYERS = 4;
  localparam int unsigned LAYER_W_DEFAULT [NUM_LAYERS] = '{2048, 2048, 1024, 256};
  // Pipeline register after this many layers (stage 1 | stage 2).
  localparam int unsigned SPLIT_DEFAULT = 2;
  // Cycles from the clock edge that samples an image to the edge at which a
  // consumer samples its score (paper, Table 1: 3 cc for LGN-LT2).
  localparam int unsigned LATENCY = 3;

  // ---------------------------------------------------------------- config
  // 32-bit integer mixer (xorshift-multiply), used only to spread the
  // stand-in configuration over all gate types.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Gate held by node `node` of layer `layer`.
  function automatic gate_e node_gate(input int unsigned layer, input int unsigned node);
    logic [3:0] h;
    h = 4'(mix32(32'(layer) * 32'h9e3779b9 ^ 32'(node) ^ 32'h5bd1e995));
    return gate_e'(h);
  endfunction

  // Index (0 .. in_w-1) in the previous layer of input `which` (0 = a, 1 = b)
  // of node `node`. Inputs 2n and 2n+1 of a layer-specific permutation
  // k -> (k * 7919 + offset) mod in_w, so a layer with 2*out_w >= in_w reads
  // every bit of the layer before it (7919 is prime and must not divide in_w).
  function automatic int unsigned node_src(input int unsigned layer, input int unsigned node,
                                           input int unsigned which, input int unsigned in_w);
    longint unsigned k;
    longint unsigned off;
    k   = (longint'(node) * 2 + longint'(which)) % longint'(in_w);
    off = longint'(mix32(32'(layer) + 32'h1234_5678)) % longint'(in_w);
    return int'((k * 7919 + off) % longint'(in_w));
  endfunction

endpackage
