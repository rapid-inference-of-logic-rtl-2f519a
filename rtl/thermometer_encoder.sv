// thermometer_encoder: binarizes an image of unsigned pixels, pixel by pixel.
//
// For thresholds T = {t_1 .. t_N}, threshold i of a pixel x gives the bit
// (x >= t_i). The N bits of a pixel are packed with t_1 in the most
// significant position, so that the paper's example reads literally: with
// T = {10, 20, 30}, x = 15 gives 3'b100 and x = 25 gives 3'b110. Pixel p
// occupies bits [p*N_THR +: N_THR] of the output.
//
// Interface: pix (N_PIX packed pixels, pixel 0 in the low bits), code
// (N_PIX*N_THR bits). Combinational, zero latency; N_PIX*N_THR comparators.
//
// Follows the paper: the >= rule, the default thresholds (the paper's
// example). This design's choices: one threshold set shared by all pixels
// (the paper does not say whether thresholds are per pixel), the pixel width
// and the bit order inside a pixel's code.
module thermometer_encoder
  import lgn_pkg::*;
#(
  parameter int unsigned N_PIX_P = lgn_pkg::N_PIX,
  parameter int unsigned PIX_W_P = lgn_pkg::PIX_W,
  parameter int unsigned N_THR_P = lgn_pkg::N_THR,
  parameter logic [PIX_W_P-1:0] THRESH [N_THR_P] = lgn_pkg::THRESH_DEFAULT
) (
  input  logic [N_PIX_P-1:0][PIX_W_P-1:0] pix,
  output logic [N_PIX_P*N_THR_P-1:0]      code
);

  always_comb begin
    for (int p = 0; p < N_PIX_P; p++) begin
      for (int i = 0; i < N_THR_P; i++) begin
        code[p*N_THR_P + (N_THR_P-1-i)] = (pix[p] >= THRESH[i]);
      end
    end
  end

endmodule
