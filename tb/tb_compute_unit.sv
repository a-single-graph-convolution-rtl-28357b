// tb_compute_unit: feeds kernel steps with random operand vectors straight
// into the compute unit and checks the registered write one cycle later:
// address, data (including lanes at or above out_lim forced to zero), and
// the saturation pulse. Covers every opcode, the three B operand modes and
// a multi-step OP_MM accumulation and OP_MMT assembly, subtraction, the
// exponential and the row maximum.
module tb_compute_unit;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  localparam int NL = LANES;
  localparam int AW = 12;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, we, sat_evt;
  logic [AW-1:0] waddr;
  step_t step;
  vec_t ra, rb, rc, wdata;

  compute_unit #(.ADDR_W(AW)) dut (.clk, .rst_n, .step, .ra, .rb, .rc, .we, .waddr, .wdata, .sat_evt);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rv(int lo, int hi);
    vec_t v;
    for (int l = 0; l < NL; l++) v[l] = data_t'(int'($urandom_range(0, hi - lo)) + lo);
    return v;
  endfunction

  function automatic mat_t m1(vec_t v);
    mat_t m = new_mat(1, NL);
    for (int l = 0; l < NL; l++) m[0][l] = v[l];
    return m;
  endfunction

  // apply one step, then check the write that follows
  task automatic apply(step_t s, vec_t a, vec_t b, vec_t c, bit expect_we, mat_t e, int lim);
    @(negedge clk);
    step = s; ra = a; rb = b; rc = c;
    @(posedge clk);
    #1;
    step.valid = 0;
    checks++;
    if (we !== expect_we) begin failures++; $display("we=%0d expected %0d (op %s)", we, expect_we, s.op.name()); end
    if (expect_we) begin
      checks++;
      if (waddr != AW'(s.waddr)) failures++;
      for (int l = 0; l < NL; l++) begin
        automatic int ev = (l < lim) ? e[0][l] : 0;
        checks++;
        if (int'(wdata[l]) != ev) begin
          failures++;
          if (failures < 10) $display("op %s lane %0d got %0d expected %0d", s.op.name(), l, wdata[l], ev);
        end
      end
    end
  endtask

  initial begin
    step_t s;
    vec_t a, b, c;
    mat_t e, ma, mb;
    int sat_pulses = 0;
    rst_n = 0; step = '0; ra = '0; rb = '0; rc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int rep = 0; rep < 20; rep++) begin
      automatic int lim = (rep % 2) ? NL : int'($urandom_range(1, NL));
      s = '0; s.valid = 1; s.first = 1; s.last = 1; s.out_lim = DIM_W'(lim); s.fn = FN_RELU;
      s.waddr = ADDR_W_MAX'($urandom_range(0, 4095));
      // matrix addition, full and per-row-scalar operand
      a = rv(-20000, 20000); b = rv(-20000, 20000);
      s.op = OP_ADD; s.bmode = BM_FULL;
      apply(s, a, b, c, 1, add(m1(a), m1(b), 0), lim);
      s.bmode = BM_COL;
      begin
        automatic vec_t bb = b;
        for (int l = 0; l < NL; l++) bb[l] = b[0];
        apply(s, a, b, c, 1, add(m1(a), m1(bb), 0), lim);
      end
      s.fn = FN_SUB;
      begin
        automatic mat_t col = new_mat(1, 1);
        col[0][0] = b[0];
        apply(s, a, b, c, 1, sub(m1(a), col), lim);
      end
      // activations
      s.op = OP_ACT; s.bmode = BM_FULL; s.fn = FN_SIGMOID;
      a = rv(-2000, 2000);
      apply(s, a, b, c, 1, sigm(m1(a)), lim);
      s.fn = FN_EXP;
      apply(s, a, b, c, 1, expm(m1(a)), lim);
      s.fn = FN_RELU;
      apply(s, a, b, c, 1, relu(m1(a)), lim);
      // batch normalisation: scale on B, shift on C
      s.op = OP_BN; s.bmode = BM_ROW;
      b = rv(0, 600); c = rv(-300, 300);
      ma = new_mat(2, NL);
      for (int l = 0; l < NL; l++) begin ma[0][l] = b[l]; ma[1][l] = c[l]; end
      apply(s, a, b, c, 1, bnorm(m1(a), ma), lim);
      // max pooling: lo chunk on A, hi chunk on C
      s.op = OP_POOL;
      begin
        automatic mat_t w = new_mat(1, 2 * NL);
        for (int l = 0; l < NL; l++) begin w[0][l] = a[l]; w[0][l + NL] = c[l]; end
        apply(s, a, b, c, 1, pool(w), lim);
      end
      // elementwise: Hadamard and row division by lane 0 of B
      s.op = OP_EW; s.fn = FN_MUL; s.bmode = BM_FULL;
      b = rv(-1000, 1000);
      apply(s, a, b, c, 1, hadamard(m1(a), m1(b)), lim);
      s.fn = FN_ROWDIV; s.bmode = BM_COL;
      b[0] = data_t'($urandom_range(1, 5000));
      begin
        automatic mat_t d = new_mat(1, 1);
        d[0][0] = b[0];
        apply(s, a, b, c, 1, rowdiv(m1(a), d), lim);
      end
      // OP_MM over K = 4 steps: row vector [a0..a3] times 4 x LANES matrix
      ma = new_mat(1, 4); mb = new_mat(4, NL);
      s.op = OP_MM; s.bmode = BM_FULL;
      a = rv(-3000, 3000);
      for (int k = 0; k < 4; k++) begin
        b = rv(-3000, 3000);
        ma[0][k] = a[k];
        for (int l = 0; l < NL; l++) mb[k][l] = b[l];
        s.first = (k == 0); s.last = (k == 3); s.a_lane = LANE_W'(k);
        apply(s, a, b, c, k == 3, (k == 3) ? mm(ma, mb) : ma, lim);
      end
      // OP_MMT: 3 output columns, each one chunk of K = 50
      s.op = OP_MMT; s.k_lim = 50;
      a = rv(-3000, 3000);
      ma = new_mat(1, 50); mb = new_mat(3, 50);
      for (int l = 0; l < 50; l++) ma[0][l] = a[l];
      for (int n = 0; n < 3; n++) begin
        b = rv(-3000, 3000);
        for (int l = 0; l < 50; l++) mb[n][l] = b[l];
        s.first = 1; s.last = 1; s.out_lane = LANE_W'(n); s.flush = (n == 2);
        apply(s, a, b, c, n == 2, (n == 2) ? mmt(ma, mb) : ma, (lim < 3) ? lim : 3);
      end
      // OP_ROWMAX over one chunk of lim lanes
      s.op = OP_ROWMAX; s.k_lim = DIM_W'(lim); s.out_lim = 1; s.out_lane = 0; s.flush = 1;
      a = rv(-30000, 30000);
      begin
        automatic mat_t r = new_mat(1, lim);
        for (int l = 0; l < lim; l++) r[0][l] = a[l];
        apply(s, a, b, c, 1, rowmax(r), 1);
      end
      s.flush = 0; s.k_lim = 0; s.a_lane = 0; s.out_lane = 0;
    end
    // saturation pulse
    s = '0; s.valid = 1; s.first = 1; s.last = 1; s.out_lim = DIM_W'(NL); s.op = OP_ADD;
    a = '0; b = '0; a[3] = DATA_MAX; b[3] = 5;
    @(negedge clk); step = s; ra = a; rb = b;
    @(posedge clk); #1; step.valid = 0;
    checks++;
    if (!sat_evt) failures++;
    @(posedge clk); #1;
    checks++;
    if (sat_evt || we) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
