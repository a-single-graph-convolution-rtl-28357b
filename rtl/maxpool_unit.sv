// maxpool_unit: the max pooling unit, with two uses.
//
// Pairwise pooling (combinational, output y): max pooling over pairs of
// neighbouring features halves a row, out[c] = max(in[2c], in[2c+1]), so D
// features become floor(D/2), as the paper states for the pooling after the
// graph convolution. Pool size 2 / stride 2 along the feature axis is this
// design's reading of that sentence. lo and hi are input chunks 2j and 2j+1
// of a row; output lanes 0..LANES/2-1 come from lo and the rest from hi.
// LANES must be even so that no pair straddles two chunks.
//
// Row maximum (y_rmax): pooling over a whole row, the max over the first
// k_lim lanes of lo, carried across the chunks of a row from the step with
// first to the step with last (steps taken while valid). On the last step
// y_rmax holds the row maximum (combinational). The output softmax subtracts it from the logits. This use is this
// design's own: the paper does not say how its softmax is evaluated.
module maxpool_unit
  import gecco_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             first,
  input  logic [DIM_W-1:0] k_lim,
  input  vec_t             lo,
  input  vec_t             hi,
  output vec_t             y,
  output data_t            y_rmax
);

  localparam int unsigned H = LANES / 2;

  if (LANES % 2 != 0) begin : g_bad_lanes
    $error("maxpool_unit needs an even LANES");
  end

  function automatic data_t max2(input data_t p, input data_t q);
    return (p > q) ? p : q;
  endfunction

  always_comb begin
    for (int l = 0; l < int'(H); l++) begin
      y[l]     = max2(lo[2*l], lo[2*l+1]);
      y[l + H] = max2(hi[2*l], hi[2*l+1]);
    end
  end

  data_t run_max, cur_max;

  always_comb begin
    cur_max = first ? DATA_MIN : run_max;
    for (int l = 0; l < int'(LANES); l++) begin
      if (DIM_W'(l) < k_lim) cur_max = max2(cur_max, lo[l]);
    end
    y_rmax = cur_max;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     run_max <= DATA_MIN;
    else if (valid) run_max <= cur_max;
  end

endmodule
