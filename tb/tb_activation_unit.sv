// tb_activation_unit: drives random and edge-case vectors through the
// activation unit in ReLU, sigmoid and exponential mode and compares every lane with the
// golden model (ReLU; PLAN sigmoid evaluated in floating point; the
// 2^(x log2 e) exponential).
module tb_activation_unit;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fn_e  fn;
  vec_t x, y;
  activation_unit dut (.fn, .x, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      fn = (t % 3 == 2) ? FN_EXP : (t % 3 == 1) ? FN_SIGMOID : FN_RELU;
      for (int l = 0; l < int'(LANES); l++) begin
        // mix of small values (all sigmoid segments) and full-range values
        if (t % 4 < 2 || fn == FN_EXP) x[l] = data_t'($urandom_range(0, 3200)) - data_t'(1600);
        else           x[l] = data_t'($urandom);
      end
      if (t < 3) begin
        x[0] = 0; x[1] = 1280; x[2] = -1280; x[3] = 608; x[4] = -608; x[5] = 256; x[6] = -256;
        x[7] = DATA_MAX; x[8] = DATA_MIN; x[9] = 1279; x[10] = 607; x[11] = 255;
      end
      #1;
      for (int l = 0; l < int'(LANES); l++) begin
        automatic int exp_v = (fn == FN_RELU) ? (x[l] > 0 ? int'(x[l]) : 0) :
                              (fn == FN_SIGMOID) ? rsigmoid(int'(x[l])) : rexp(int'(x[l]));
        checks++;
        if (int'(y[l]) != exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch fn=%0d x=%0d y=%0d exp=%0d", fn, x[l], y[l], exp_v);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
