// lgn_top: logic-gate-network (LGN) anomaly detector for the Level-1 trigger.
//
// Every clock cycle it may take one 18 x 14 calorimeter image and, three
// cycles later, delivers one anomaly score for it. The image is binarized by a
// thermometer encoder (each pixel compared with N_THR thresholds), the bits
// pass through NUM_LAYERS feedforward layers of fixed two-input logic gates,
// and the ones of the last layer are counted to give the score.
//
// Pipeline (one image per cycle, three register stages):
//   stage 1  thermometer encoder + layers 0 .. SPLIT-1          -> s1_bits
//   stage 2  layers SPLIT .. NUM_LAYERS-1                       -> s2_bits
//   stage 3  group_sum (popcount of the last layer)             -> score
// An image presented with in_valid before clock edge k has its score on
// `score` with out_valid high after edge k+2, i.e. a consumer samples it at
// edge k+3: three cycles of latency, which is the paper's figure for its LGN
// (3 cycles of 6.25 ns). Back-to-back images and gaps are both allowed;
// there is no back-pressure because the pipeline never stalls.
//
// Interface: clk, rst_n (active-low synchronous reset; clears only the valid
// bits, data registers are not reset), in_valid, pix (pixel p = row*14 + col
// in bits [p*PIX_W +: PIX_W]), out_valid, score.
//
// Follows the paper: image size, thermometer encoding and its example
// thresholds, two-input gate nodes fixed after training, feedforward layers,
// 3-cycle latency, no multipliers (no DSPs). This design's choices: pixel
// width, layer count and widths, where the pipeline registers sit, the valid
// handshake and reset, the popcount score, and the stand-in gate/wiring
// configuration in lgn_pkg (the trained network is not published).
module lgn_top
  import lgn_pkg::*;
#(
  parameter int unsigned N_PIX_P      = lgn_pkg::N_PIX,
  parameter int unsigned PIX_W_P      = lgn_pkg::PIX_W,
  parameter int unsigned N_THR_P      = lgn_pkg::N_THR,
  parameter logic [PIX_W_P-1:0] THRESH [N_THR_P] = lgn_pkg::THRESH_DEFAULT,
  parameter int unsigned NUM_LAYERS_P = lgn_pkg::NUM_LAYERS,
  parameter int unsigned LAYER_W [NUM_LAYERS_P] = lgn_pkg::LAYER_W_DEFAULT,
  parameter int unsigned SPLIT        = lgn_pkg::SPLIT_DEFAULT,
  localparam int unsigned N_IN  = N_PIX_P * N_THR_P,
  localparam int unsigned N_OUT = LAYER_W[NUM_LAYERS_P-1],
  localparam int unsigned SW    = $clog2(N_OUT + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [N_PIX_P-1:0][PIX_W_P-1:0] pix,
  output logic                           out_valid,
  output logic [SW-1:0]                  score
);

  localparam int unsigned W1 = LAYER_W[SPLIT-1];  // width at the stage 1 register
  localparam int unsigned W2 = N_OUT;             // width at the stage 2 register

  // Elaboration checks on the parameters.
  if (SPLIT < 1 || SPLIT >= NUM_LAYERS_P) begin : g_bad_split
    $error("lgn_top: SPLIT must lie in 1 .. NUM_LAYERS_P-1");
  end

  // ------------------------------------------------------------ stage 1 logic
  logic [N_IN-1:0] enc_bits;

  thermometer_encoder #(
    .N_PIX_P(N_PIX_P), .PIX_W_P(PIX_W_P), .N_THR_P(N_THR_P), .THRESH(THRESH)
  ) u_enc (
    .pix (pix),
    .code(enc_bits)
  );

  logic [W1-1:0] s1_bits;
  logic          s1_valid;
  logic [W2-1:0] s2_bits;
  logic          s2_valid;

  // ------------------------------------------------------------ layer chain
  // Layer l reads the encoder (l = 0), the stage 1 register (l = SPLIT) or
  // the layer before it.
  for (genvar l = 0; l < NUM_LAYERS_P; l++) begin : g_layer
    localparam int unsigned IN_W  = (l == 0) ? N_IN : LAYER_W[l-1];
    localparam int unsigned OUT_W = LAYER_W[l];
    logic [IN_W-1:0]  x;
    logic [OUT_W-1:0] y;

    if (l == 0) begin : g_src_enc
      assign x = enc_bits;
    end else if (l == SPLIT) begin : g_src_reg
      assign x = s1_bits;
    end else begin : g_src_prev
      assign x = g_layer[l-1].y;
    end

    lgn_layer #(.LAYER(l), .IN_W(IN_W), .OUT_W(OUT_W)) u_layer (
      .x(x),
      .y(y)
    );
  end

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s2_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      s2_valid  <= s1_valid;
      out_valid <= s2_valid;
    end
  end

  // Data registers load every cycle; a bubble carries don't-care data that
  // out_valid marks as such.
  logic [SW-1:0] score_d;

  always_ff @(posedge clk) begin
    s1_bits <= g_layer[SPLIT-1].y;
    s2_bits <= g_layer[NUM_LAYERS_P-1].y;
    score   <= score_d;
  end

  // ------------------------------------------------------------ stage 3 logic
  group_sum #(.N(W2)) u_sum (
    .bits (s2_bits),
    .score(score_d)
  );

  // ------------------------------------------------------------ assertions
  // A score only ever comes out for an image taken LATENCY cycles earlier.
  a_out_follows_in: assert property (
    @(posedge clk) disable iff (!rst_n) out_valid |-> $past(in_valid, LATENCY)
  ) else $error("lgn_top: out_valid without an image %0d cycles earlier", LATENCY);

endmodule
