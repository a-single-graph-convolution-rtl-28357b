// matadd_unit: matrix addition, one vector per cycle, combinational.
// y[l] = saturate(a[l] + b[l]). The control unit decides what b is: the
// matching vector of a same-shaped matrix (the residual X6 = X5 + X4) or the
// same row vector for every row (a bias, broadcast). The sum saturates to the
// signed DATA_W range; the paper gives no number format, saturation is this
// design's choice. sat_any flags that at least one lane saturated. With sub
// set the unit subtracts instead (y = a - b), which the output softmax uses
// to take the row maximum off the logits.
module matadd_unit
  import gecco_pkg::*;
(
  input  vec_t a,
  input  vec_t b,
  input  logic sub,
  output vec_t y,
  output logic sat_any
);

  always_comb begin
    logic signed [ACC_W-1:0] s;
    sat_any = 1'b0;
    for (int l = 0; l < int'(LANES); l++) begin
      s = sub ? ACC_W'(a[l]) - ACC_W'(b[l]) : ACC_W'(a[l]) + ACC_W'(b[l]);
      y[l] = sat(s);
      sat_any |= is_sat(s);
    end
  end

endmodule
