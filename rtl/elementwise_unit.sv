// elementwise_unit: elementwise operations, one vector per cycle,
// combinational.
//
//   FN_MUL    y[l] = saturate((a[l] * b[l]) >> FRAC)   Hadamard product
//   FN_ROWDIV y[l] = saturate(a[l] / b[0])            row normalisation
//
// FN_ROWDIV is the division in the batch-wise attention, where every row of
// sigmoid(X4 X4^T) X4 is divided by the sum of its row of sigmoid(X4 X4^T).
// One reciprocal of the per-row scalar b[0] is formed (FRAC + RECIP_FRAC
// fraction bits) and every lane multiplies by it, so the unit holds a single
// divider and LANES multipliers. A zero divisor gives zero (the row being
// normalised is then all zero too). The paper only names an elementwise
// operation unit; the operation list and this arithmetic are this design's.
module elementwise_unit
  import gecco_pkg::*;
(
  input  fn_e  fn,
  input  vec_t a,
  input  vec_t b,
  output vec_t y
);

  localparam int unsigned RSH = FRAC + RECIP_FRAC;

  logic signed [63:0] recip;

  always_comb begin
    logic signed [63:0] num, den;
    num = 64'sd1 <<< (2*FRAC + RECIP_FRAC);
    den = 64'(b[0]);
    recip = (den == 0) ? 64'sd0 : num / den;
  end

  always_comb begin
    logic signed [63:0] p;
    for (int l = 0; l < int'(LANES); l++) begin
      if (fn == FN_ROWDIV) begin
        p = (64'(a[l]) * recip) >>> RSH;
      end else begin
        p = (64'(a[l]) * 64'(b[l])) >>> FRAC;
      end
      if (p > 64'(DATA_MAX))      y[l] = DATA_MAX;
      else if (p < 64'(DATA_MIN)) y[l] = DATA_MIN;
      else                        y[l] = data_t'(p);
    end
  end

endmodule
