// batchnorm_unit: batch normalisation at inference time, one vector per
// cycle, combinational. With trained statistics, batch normalisation is a
// per-feature affine map, so the unit computes
//   y[l] = saturate((x[l] * scale[l]) >> FRAC + shift[l])
// with scale = gamma / sqrt(var + eps) and shift = beta - mean * scale folded
// offline into two row vectors held in the memory buffer. The paper names a
// batch normalisation unit after the graph convolution; folding it into a
// scale and shift is this design's choice. Products are truncated (arithmetic
// shift right).
module batchnorm_unit
  import gecco_pkg::*;
(
  input  vec_t x,
  input  vec_t scale,
  input  vec_t shift,
  output vec_t y
);

  always_comb begin
    logic signed [ACC_W-1:0] p;
    for (int l = 0; l < int'(LANES); l++) begin
      p = (ACC_W'(x[l]) * ACC_W'(scale[l])) >>> FRAC;
      y[l] = sat(p + ACC_W'(shift[l]));
    end
  end

endmodule
