// compute_unit: the six kernel units of the accelerator (matrix
// multiplication, matrix addition, elementwise operations, activation, batch
// normalisation, max pooling) behind one operand/result path. All layers of
// the model run on these same units one after another, which is the paper's
// resource-sharing scheme; which unit works is chosen by the step's opcode.
//
// Interface and timing: `step` describes the kernel step whose operands
// (ra, rb, rc) arrive this cycle from the memory buffer's three read ports.
// The selected unit computes combinationally; lanes at or above
// step.out_lim are forced to zero; the result is registered and presented on
// (we, waddr, wdata) one cycle later for the memory buffer's write port.
// For BM_COL calls the per-row scalar in lane 0 of rb is broadcast to all
// lanes. Port use: A = first operand; B = second operand (bias, weight row,
// BN scale, divisor); C = BN shift, or the odd input chunk of max pooling.
// OP_ROWMAX (row maximum, for the output softmax) writes once per row, on
// the last step of the row.
// sat_evt pulses with a write in which some lane saturated.
module compute_unit
  import gecco_pkg::*;
#(
  parameter int unsigned ADDR_W = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  step_t             step,
  input  vec_t              ra,
  input  vec_t              rb,
  input  vec_t              rc,
  output logic              we,
  output logic [ADDR_W-1:0] waddr,
  output vec_t              wdata,
  output logic              sat_evt
);

  vec_t b_eff;
  vec_t y_mm, y_add, y_act, y_bn, y_pool, y_ew;
  data_t y_rmax;
  logic mm_valid, mm_sat, add_sat;
  logic is_mm;

  always_comb begin
    b_eff = rb;
    if (step.bmode == BM_COL) begin
      for (int l = 0; l < int'(LANES); l++) b_eff[l] = rb[0];
    end
  end

  assign is_mm = (step.op == OP_MM) || (step.op == OP_MMT) || (step.op == OP_ROWSUM);

  matmul_unit u_mm (
    .clk, .rst_n,
    .valid   (step.valid && is_mm),
    .mode    (step.op),
    .a       (ra),
    .a_lane  (step.a_lane),
    .b       (rb),
    .k_lim   (step.k_lim),
    .first   (step.first),
    .last    (step.last),
    .out_lane(step.out_lane),
    .flush   (step.flush),
    .y_valid (mm_valid),
    .y       (y_mm),
    .sat_any (mm_sat)
  );

  matadd_unit      u_add  (.a(ra), .b(b_eff), .sub(step.fn == FN_SUB), .y(y_add), .sat_any(add_sat));
  activation_unit  u_act  (.fn(step.fn), .x(ra), .y(y_act));
  batchnorm_unit   u_bn   (.x(ra), .scale(rb), .shift(rc), .y(y_bn));
  maxpool_unit     u_pool (.clk, .rst_n, .valid(step.valid && step.op == OP_ROWMAX),
                           .first(step.first), .k_lim(step.k_lim),
                           .lo(ra), .hi(rc), .y(y_pool), .y_rmax(y_rmax));
  elementwise_unit u_ew   (.fn(step.fn), .a(ra), .b(b_eff), .y(y_ew));

  vec_t res;
  logic res_valid, res_sat;

  always_comb begin
    res       = '0;
    res_valid = step.valid;
    res_sat   = 1'b0;
    unique case (step.op)
      OP_MM, OP_MMT, OP_ROWSUM: begin res = y_mm; res_valid = mm_valid; res_sat = mm_sat; end
      OP_ADD:  begin res = y_add; res_sat = add_sat; end
      OP_ACT:  res = y_act;
      OP_BN:   res = y_bn;
      OP_POOL: res = y_pool;
      OP_ROWMAX: begin res = '0; res[0] = y_rmax; res_valid = step.valid && step.last; end
      OP_EW:   res = y_ew;
      default: res_valid = 1'b0;
    endcase
    for (int l = 0; l < int'(LANES); l++) begin
      if (DIM_W'(l) >= step.out_lim) res[l] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we      <= 1'b0;
      waddr   <= '0;
      wdata   <= '0;
      sat_evt <= 1'b0;
    end else begin
      we      <= res_valid;
      waddr   <= step.waddr[ADDR_W-1:0];
      wdata   <= res;
      sat_evt <= res_valid && res_sat;
    end
  end

endmodule
