// tb_matmul_unit: drives the matrix multiplication unit through random
// products in all three modes, stepping the loop nest by hand the way the
// control unit does, and compares every emitted vector with the golden model:
//   OP_MM     A[4xK] * B[KxLANES], K = 150
//   OP_MMT    A[3xK] * B[NxK]^T,   K = 100 (two chunks, second one masked), N = 90
//   OP_ROWSUM row sums of A[3xK]
// The product shift by FRAC and saturation are also exercised (large values).
module tb_matmul_unit;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  localparam int NL = LANES;
  int checks = 0, failures = 0;

  logic valid, first, last, flush, y_valid, sat_any, rst_n;
  op_e mode;
  vec_t a, b, y;
  logic [LANE_W-1:0] a_lane, out_lane;
  logic [DIM_W-1:0] k_lim;
  int sat_seen = 0;

  matmul_unit dut (.clk, .rst_n, .valid, .mode, .a, .a_lane, .b, .k_lim, .first, .last,
                   .out_lane, .flush, .y_valid, .y, .sat_any);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mat_t rand_mat(int m, int n, int lo, int hi);
    mat_t c = new_mat(m, n);
    foreach (c[i, j]) c[i][j] = int'($urandom_range(0, hi - lo)) + lo;
    return c;
  endfunction

  // padded chunk ch of row r
  function automatic vec_t chunk(mat_t m, int row, int ch);
    vec_t v = '0;
    int   idx, len;
    len = m[row].size();
    for (int l = 0; l < NL; l++) begin
      idx = ch * NL + l;
      if (idx < len) v[l] = data_t'(m[row][idx]);
      else v[l] = data_t'($urandom);   // garbage padding must be masked
    end
    return v;
  endfunction

  task automatic compare(vec_t got, mat_t em, int row, int ch, int nvalid);
    for (int l = 0; l < nvalid; l++) begin
      checks++;
      if (int'(got[l]) != em[row][ch * NL + l]) begin
        failures++;
        if (failures < 10) $display("mismatch mode=%s lane=%0d got=%0d exp=%0d", mode.name(), l, got[l], em[row][ch*NL+l]);
      end
    end
  endtask

  initial begin
    mat_t ma, mb, mc;
    rst_n = 0; valid = 0; first = 0; last = 0; flush = 0; mode = OP_MM;
    a = '0; b = '0; a_lane = '0; out_lane = '0; k_lim = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int rep = 0; rep < 3; rep++) begin
      // ---- OP_MM
      ma = rand_mat(4, 150, rep == 2 ? -32768 : -600, rep == 2 ? 32767 : 600);
      mb = rand_mat(150, LANES, -600, 600);
      mc = mm(ma, mb);
      mode = OP_MM;
      for (int i = 0; i < 4; i++) begin
        for (int k = 0; k < 150; k++) begin
          @(negedge clk);
          valid = 1; first = (k == 0); last = (k == 149);
          a = chunk(ma, i, k / NL); a_lane = LANE_W'(k % NL);
          b = chunk(mb, k, 0);
          #1;
          if (last) begin
            checks++;
            if (!y_valid) failures++;
            compare(y, mc, i, 0, LANES);
            if (sat_any) sat_seen++;
          end else begin
            checks++;
            if (y_valid) failures++;
          end
        end
      end
      @(negedge clk); valid = 0;

      // ---- OP_MMT and OP_ROWSUM
      for (int md = 0; md < 2; md++) begin
        automatic int nn = (md == 0) ? 90 : 1;
        ma = rand_mat(3, 100, -900, 900);
        mb = rand_mat(nn, 100, -900, 900);
        mc = (md == 0) ? mmt(ma, mb) : rowsum(ma);
        mode = (md == 0) ? OP_MMT : OP_ROWSUM;
        for (int i = 0; i < 3; i++) begin
          for (int n = 0; n < nn; n++) begin
            for (int kc = 0; kc < 2; kc++) begin
              @(negedge clk);
              valid = 1; first = (kc == 0); last = (kc == 1);
              a = chunk(ma, i, kc); b = chunk(mb, n, kc);
              k_lim = DIM_W'(100 - kc * NL);
              out_lane = LANE_W'(n % NL);
              flush = last && ((n % NL) == NL - 1 || n == nn - 1);
              #1;
              checks++;
              if (y_valid != flush) failures++;
              if (flush) compare(y, mc, i, n / NL, (n == nn - 1) ? (n % NL) + 1 : NL);
            end
          end
        end
        @(negedge clk); valid = 0;
      end
    end
    checks++;
    if (sat_seen == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
