// matmul_unit: the matrix multiplication unit. LANES multipliers are shared
// by three ways of walking a product, chosen per kernel call:
//
//   OP_MM     C = A * B. Output-stationary: each cycle one element a of A
//             (selected from its vector word by a_lane) times one vector of a
//             row of B adds into LANES accumulators, one per output column.
//             After K cycles (first .. last) the LANES results of one output
//             chunk are ready. Used for the fully connected layers, the graph
//             aggregation A*X3, X*W2 and the attention product.
//   OP_MMT    C = A * B^T. Each cycle a chunk of a row of A and the same chunk
//             of a row of B are multiplied lane by lane and summed by an adder
//             tree (lanes >= k_lim masked); after the last chunk the scalar
//             C[i][n] is placed in lane out_lane of an assembly register and
//             the vector is emitted when flush is set. Used for X4 * X4^T.
//   OP_ROWSUM as OP_MMT with B taken as all ones: the row-wise summation of
//             the attention normalisation.
//
// Timing: operands are taken on the cycle valid is high; the result (y,
// y_valid) is combinational on the cycle that carries last (and flush for the
// transposed forms), so the caller registers it. Results are shifted right by
// FRAC and saturated to DATA_W. The dataflow is this design's choice; the
// paper only names a matrix multiplication unit and row-wise summations.
module matmul_unit
  import gecco_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  input  op_e                  mode,
  input  vec_t                 a,
  input  logic [LANE_W-1:0]    a_lane,
  input  vec_t                 b,
  input  logic [DIM_W-1:0]     k_lim,
  input  logic                 first,
  input  logic                 last,
  input  logic [LANE_W-1:0]    out_lane,
  input  logic                 flush,
  output logic                 y_valid,
  output vec_t                 y,
  output logic                 sat_any
);

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t [LANES-1:0] acc_v;    // per-lane accumulators (OP_MM)
  acc_t             acc_s;    // scalar accumulator (OP_MMT, OP_ROWSUM)
  vec_t             asm_q;    // output vector being assembled

  acc_t [LANES-1:0] prod;
  acc_t [LANES-1:0] sum_v;
  acc_t             sum_s;
  data_t            lane_res;

  always_comb begin
    data_t x, w;
    acc_t  dot;
    dot = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      x = (mode == OP_MM) ? a[a_lane] : a[l];
      w = (mode == OP_ROWSUM) ? data_t'(1 << FRAC) : b[l];
      prod[l]  = acc_t'(x) * acc_t'(w);
      sum_v[l] = (first ? acc_t'(0) : acc_v[l]) + prod[l];
      if (DIM_W'(l) < k_lim) dot += prod[l];
    end
    sum_s    = (first ? acc_t'(0) : acc_s) + dot;
    lane_res = sat(sum_s >>> FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_v <= '0;
      acc_s <= '0;
      asm_q <= '0;
    end else if (valid) begin
      if (mode == OP_MM) begin
        acc_v <= sum_v;
      end else begin
        acc_s <= sum_s;
        if (last) begin
          if (flush) asm_q <= '0;
          else       asm_q[out_lane] <= lane_res;
        end
      end
    end
  end

  always_comb begin
    y       = '0;
    sat_any = 1'b0;
    y_valid = valid && last && ((mode == OP_MM) || flush);
    if (mode == OP_MM) begin
      for (int l = 0; l < int'(LANES); l++) begin
        y[l] = sat(sum_v[l] >>> FRAC);
        sat_any |= is_sat(sum_v[l] >>> FRAC);
      end
    end else begin
      y = asm_q;
      y[out_lane] = lane_res;
      sat_any = is_sat(sum_s >>> FRAC);
    end
    if (!y_valid) sat_any = 1'b0;
  end

endmodule
