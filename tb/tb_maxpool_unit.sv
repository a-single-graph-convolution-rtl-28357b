// tb_maxpool_unit: random pairs of input chunks through the max pooling unit;
// output lane c must be the larger of input elements 2c and 2c+1 of the
// concatenated chunks. Then row maxima over rows of 1 to 3 chunks with a
// partly valid last chunk (the invalid lanes carry larger values that must
// be ignored).
module tb_maxpool_unit;
  import gecco_pkg::*;

  localparam int NL = LANES;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, valid, first;
  logic [DIM_W-1:0] k_lim;
  vec_t lo, hi, y;
  data_t y_rmax;
  maxpool_unit dut (.clk, .rst_n, .valid, .first, .k_lim, .lo, .hi, .y, .y_rmax);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; valid = 0; first = 0; k_lim = '0; lo = '0; hi = '0;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int row[2*LANES];
      for (int l = 0; l < 2*NL; l++) row[l] = int'($urandom_range(0, 65535)) - 32768;
      for (int l = 0; l < NL; l++) begin
        lo[l] = data_t'(row[l]);
        hi[l] = data_t'(row[l + NL]);
      end
      #1;
      for (int c = 0; c < NL; c++) begin
        automatic int e = row[2*c] > row[2*c+1] ? row[2*c] : row[2*c+1];
        checks++;
        if (int'(y[c]) != e) begin
          failures++;
          if (failures < 10) $display("mismatch c=%0d y=%0d exp=%0d", c, y[c], e);
        end
      end
      @(negedge clk);
    end
    // row maximum
    for (int t = 0; t < 200; t++) begin
      automatic int len = int'($urandom_range(1, 3 * NL));
      automatic int mx = -40000;
      automatic int nch = (len + NL - 1) / NL;
      for (int ch = 0; ch < nch; ch++) begin
        for (int l = 0; l < NL; l++) begin
          if (ch * NL + l < len) begin
            lo[l] = data_t'(int'($urandom_range(0, 60000)) - 30000);
            if (int'(lo[l]) > mx) mx = int'(lo[l]);
          end else lo[l] = DATA_MAX;
        end
        valid = 1; first = (ch == 0); k_lim = DIM_W'(len - ch * NL);
        #1;
        if (ch == nch - 1) begin
          checks++;
          if (int'(y_rmax) != mx) begin
            failures++;
            if (failures < 10) $display("row max got %0d expected %0d", y_rmax, mx);
          end
        end
        @(negedge clk);
      end
      valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
