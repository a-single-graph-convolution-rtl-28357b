// tb_batchnorm_unit: random inputs, scales and shifts through the batch
// normalisation unit, compared lane by lane with (x*scale >> 8) + shift,
// saturated.
module tb_batchnorm_unit;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vec_t x, scale, shift, y;
  batchnorm_unit dut (.x, .scale, .shift, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int l = 0; l < int'(LANES); l++) begin
        x[l]     = (t % 4 == 0) ? data_t'($urandom) : data_t'($urandom_range(0, 4000)) - 2000;
        scale[l] = data_t'($urandom_range(0, 1024)) - 512;
        shift[l] = data_t'($urandom_range(0, 2000)) - 1000;
      end
      #1;
      for (int l = 0; l < int'(LANES); l++) begin
        automatic int e = rsat(((longint'(x[l]) * scale[l]) >>> 8) + shift[l]);
        checks++;
        if (int'(y[l]) != e) begin
          failures++;
          if (failures < 10) $display("mismatch x=%0d s=%0d t=%0d y=%0d exp=%0d", x[l], scale[l], shift[l], y[l], e);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
