// threshold_unit -- Threshold Computation Unit of a Row PE.
//
// For the k-th fragment after the first covered one in a row it forms
//   x''  = x''_first + k * dx''
//   d2   = x''^2 + y''^2
//   in_gauss = d2 < threshold
// which is the squared distance of the fragment centre from the Gaussian
// centre in the transformed P''-space (equal to the exponent
// (P-mu)^T Sigma^-1 (P-mu) in screen space) and the truncation test.  Because
// dx'' is parallel to the x''-axis, y''^2 is a constant of the row and only
// x''^2 changes: two multiplies and two adds per fragment, all FP16.  The
// order of the operators (multiply dx'' by the step count, add x'', square,
// add y''^2, compare with the threshold) follows the Row PE block diagram;
// forming x'' from the step count rather than by repeated addition keeps the
// rounding error from growing along the row.
//
// Interface: combinational.  k is the step count from the first fragment.
module threshold_unit
  import gbu_pkg::*;
(
  input  fp16_t             x_first,
  input  fp16_t             dx,
  input  fp16_t             y2,
  input  fp16_t             th,
  input  logic [COL_W-1:0]  k,
  output fp16_t             d2,
  output logic              in_gauss
);

  fp16_t k_h, x_k;

  assign k_h    = pack16(ufrom_uint(16'(k)));
  assign x_k    = h_add(x_first, h_mul(dx, k_h));
  assign d2     = h_add(h_mul(x_k, x_k), y2);
  assign in_gauss = h_lt(d2, th);

endmodule
