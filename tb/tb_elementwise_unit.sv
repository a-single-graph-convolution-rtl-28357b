// tb_elementwise_unit: Hadamard products and row divisions (by positive,
// negative and zero divisors) through the elementwise unit, compared with the
// golden model.
module tb_elementwise_unit;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fn_e  fn;
  vec_t a, b, y;
  elementwise_unit dut (.fn, .a, .b, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      mat_t ma, mb, mr;
      fn = (t % 2) ? FN_ROWDIV : FN_MUL;
      ma = new_mat(1, LANES); mb = new_mat(1, LANES);
      for (int l = 0; l < int'(LANES); l++) begin
        a[l] = data_t'($urandom_range(0, 8000)) - 4000;
        b[l] = (t % 8 == 1) ? data_t'($urandom_range(1, 40)) : data_t'($urandom_range(0, 8000)) - 4000;
        if (t == 3) b[0] = 0;
        if (t == 5) b[0] = -data_t'($urandom_range(1, 3000));
        ma[0][l] = a[l]; mb[0][l] = b[l];
      end
      if (fn == FN_MUL) mr = hadamard(ma, mb);
      else begin
        automatic mat_t d = new_mat(1, 1);
        d[0][0] = b[0];
        mr = rowdiv(ma, d);
      end
      #1;
      for (int l = 0; l < int'(LANES); l++) begin
        checks++;
        if (int'(y[l]) != mr[0][l]) begin
          failures++;
          if (failures < 10) $display("mismatch fn=%0d a=%0d b=%0d/%0d y=%0d exp=%0d", fn, a[l], b[l], b[0], y[l], mr[0][l]);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
