// color_unit -- Colour Computation Unit of a Row PE: one alpha-blending step.
//
// Given the Gaussian value g = exp(-d2/2) from the LUT, the Gaussian's
// opacity o and colour c, and the pixel's accumulated colour C and
// transmittance T, it computes
//   alpha = o * g
//   C_new = C + (T * alpha) * c        for r, g and b
//   T_new = T * (1 - alpha)
// which is front-to-back alpha blending in depth order.  The operators are
// the ones drawn in the Row PE block diagram (opacity multiply, "1 -"
// subtract, T multiplies, per-channel multiply and add); everything is FP16.
// alpha is limited to 0.99 as in the reference 3D Gaussian Splatting
// renderer, so that T never reaches zero exactly (this limit is not in the
// paper).
//
// Interface: combinational.
module color_unit
  import gbu_pkg::*;
(
  input  fp16_t       g,
  input  fp16_t       opacity,
  input  fp16_t [2:0] color,
  input  pixel_t      pix_in,
  output pixel_t      pix_out
);

  localparam fp16_t ALPHA_MAX = 16'h3BEC;   // 0.99 in FP16

  fp16_t alpha_raw, alpha, w;

  assign alpha_raw = h_mul(opacity, g);
  assign alpha     = h_lt(ALPHA_MAX, alpha_raw) ? ALPHA_MAX : alpha_raw;
  assign w         = h_mul(pix_in.t, alpha);

  always_comb begin
    for (int ch = 0; ch < 3; ch++)
      pix_out.rgb[ch] = h_add(pix_in.rgb[ch], h_mul(w, color[ch]));
    pix_out.t = h_mul(pix_in.t, h_sub(FP16_ONE, alpha));
  end

endmodule
