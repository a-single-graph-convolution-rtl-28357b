// tb_matadd_unit: random vector pairs, including ones that overflow, through
// the matrix addition unit, adding and subtracting; checks every saturated
// result and the saturation flag.
module tb_matadd_unit;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vec_t a, b, y;
  logic sat_any, sub;
  matadd_unit dut (.a, .b, .sub, .y, .sat_any);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      automatic bit any = 0;
      sub = (t % 2 == 1);
      for (int l = 0; l < int'(LANES); l++) begin
        if (t % 3 == 0) begin a[l] = data_t'($urandom); b[l] = data_t'($urandom); end
        else begin a[l] = data_t'($urandom_range(0, 8000)) - 4000; b[l] = data_t'($urandom_range(0, 8000)) - 4000; end
      end
      #1;
      for (int l = 0; l < int'(LANES); l++) begin
        automatic longint s = sub ? longint'(a[l]) - longint'(b[l]) : longint'(a[l]) + longint'(b[l]);
        automatic int e = rsat(s);
        if (s != e) any = 1;
        checks++;
        if (int'(y[l]) != e) begin
          failures++;
          if (failures < 10) $display("mismatch a=%0d b=%0d y=%0d exp=%0d", a[l], b[l], y[l], e);
        end
      end
      checks++;
      if (sat_any != any) failures++;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
