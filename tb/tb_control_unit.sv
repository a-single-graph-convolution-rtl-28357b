// tb_control_unit: loads a program with one call of every kernel type (with
// shapes that span several vectors) into the control unit, runs it, and
// compares every issued step (read addresses and descriptor fields) with a
// sequence built independently here from the loop nests. Also checks that
// the run ends with a done pulse and that the cycle count equals
// 1 + steps + 2 per call plus 1 for the final fetch.
module tb_control_unit;
  import gecco_pkg::*;

  localparam int NL = LANES;
  localparam int AW = 14;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, imem_we, start, busy, done;
  logic [4:0] imem_addr;
  instr_t imem_wdata;
  logic [31:0] cycles;
  op_e cur_op;
  logic [AW-1:0] ra_addr, rb_addr, rc_addr;
  step_t step;

  control_unit #(.ADDR_W(AW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    op_e op; int ra, rb, rc, waddr, a_lane, out_lane, k_lim, out_lim; bit first, last, flush;
  } exp_t;
  exp_t q[$];
  instr_t prog[$];
  int ndone = 0;

  function automatic int cdiv(int x);
    return (x + NL - 1) / NL;
  endfunction

  function automatic instr_t mk(op_e op, fn_e fn, bmode_e bm, int ab, int bb, int cb,
                                int as, int bs, int cs, int m, int k, int n);
    instr_t i;
    i.op = op; i.fn = fn; i.bmode = bm;
    i.a_base = ADDR_W_MAX'(ab); i.b_base = ADDR_W_MAX'(bb); i.c_base = ADDR_W_MAX'(cb);
    i.a_str = DIM_W'(as); i.b_str = DIM_W'(bs); i.c_str = DIM_W'(cs);
    i.m = DIM_W'(m); i.k = DIM_W'(k); i.n = DIM_W'(n);
    return i;
  endfunction

  function automatic void expect_call(instr_t p);
    exp_t e;
    int m = p.m, k = p.k, n = p.n;
    int ab = int'(p.a_base), bb = int'(p.b_base), cb = int'(p.c_base);
    int as = p.a_str, bs = p.b_str, cs = p.c_str;
    e = '{default: 0, op: p.op};
    for (int i = 0; i < m; i++) begin
      case (p.op)
        OP_MM:
          for (int j = 0; j < cdiv(n); j++)
            for (int kk = 0; kk < k; kk++) begin
              e.ra = ab + i*as + kk/NL; e.rb = bb + kk*bs + j; e.a_lane = kk % NL;
              e.first = (kk == 0); e.last = (kk == k-1); e.waddr = cb + i*cs + j; e.out_lim = n - j*NL;
              q.push_back(e);
            end
        OP_MMT, OP_ROWSUM, OP_ROWMAX:
          for (int nn = 0; nn < n; nn++)
            for (int kc = 0; kc < cdiv(k); kc++) begin
              e.ra = ab + i*as + kc; e.rb = bb + nn*bs + kc; e.k_lim = k - kc*NL;
              e.first = (kc == 0); e.last = (kc == cdiv(k)-1); e.out_lane = nn % NL;
              e.flush = e.last && ((nn % NL == NL-1) || nn == n-1);
              e.waddr = cb + i*cs + nn/NL; e.out_lim = n - (nn/NL)*NL;
              q.push_back(e);
            end
        default: begin
          int no = (p.op == OP_POOL) ? n/2 : n;
          for (int j = 0; j < cdiv(no); j++) begin
            e.first = 1; e.last = 1; e.waddr = cb + i*cs + j; e.out_lim = no - j*NL;
            if (p.op == OP_POOL) begin
              e.ra = ab + i*as + 2*j; e.rc = ab + i*as + 2*j + 1;
            end else begin
              e.ra = ab + i*as + j; e.rc = bb + bs + j;
              e.rb = (p.bmode == BM_ROW) ? bb + j : (p.bmode == BM_COL) ? bb + i*bs : bb + i*bs + j;
            end
            q.push_back(e);
          end
        end
      endcase
    end
  endfunction

  // monitor: step at this edge belongs to the addresses sampled at the previous one
  int ra_q, rb_q, rc_q;
  int nsteps = 0;
  always @(posedge clk) begin
    if (rst_n && step.valid) begin
      exp_t e;
      bit bad = 0;
      nsteps++;
      if (q.size() == 0) begin
        failures++; checks++;
        $display("unexpected step");
      end else begin
        e = q.pop_front();
        checks++;
        if (step.op != e.op || ra_q != e.ra || int'(step.waddr) != e.waddr || step.first != e.first
            || step.last != e.last || int'(step.out_lim) != e.out_lim) bad = 1;
        if (e.op == OP_MM && int'(step.a_lane) != e.a_lane) bad = 1;
        if (e.op inside {OP_MM, OP_MMT, OP_ADD, OP_BN, OP_EW} && rb_q != e.rb) bad = 1;
        if (e.op inside {OP_MMT, OP_ROWSUM, OP_ROWMAX} && (int'(step.k_lim) != e.k_lim
            || int'(step.out_lane) != e.out_lane || step.flush != e.flush)) bad = 1;
        if (e.op inside {OP_BN, OP_POOL} && rc_q != e.rc) bad = 1;
        if (bad) begin
          failures++;
          if (failures < 10) $display("step %0d op %s: ra %0d/%0d rb %0d/%0d rc %0d/%0d waddr %0d/%0d first %0d/%0d last %0d/%0d lim %0d/%0d",
            nsteps, e.op.name(), ra_q, e.ra, rb_q, e.rb, rc_q, e.rc, step.waddr, e.waddr, step.first, e.first,
            step.last, e.last, step.out_lim, e.out_lim);
        end
      end
    end
    if (done) ndone++;
    ra_q = int'(ra_addr); rb_q = int'(rb_addr); rc_q = int'(rc_addr);
  end

  initial begin
    longint exp_cyc;
    rst_n = 0; imem_we = 0; start = 0; imem_addr = '0; imem_wdata = '0;
    prog.push_back(mk(OP_MM,  FN_RELU, BM_FULL, 100, 2000, 5000, 3, 2, 2, 2, 90, 100));
    prog.push_back(mk(OP_MMT, FN_RELU, BM_FULL, 300, 400, 6000, 2, 2, 2, 2, 100, 88));
    prog.push_back(mk(OP_ROWSUM, FN_RELU, BM_FULL, 700, 0, 6100, 1, 0, 1, 3, 10, 1));
    prog.push_back(mk(OP_ADD, FN_RELU, BM_ROW, 800, 900, 6200, 2, 0, 2, 2, 0, 100));
    prog.push_back(mk(OP_ADD, FN_RELU, BM_FULL, 800, 950, 6300, 2, 3, 2, 2, 0, 100));
    prog.push_back(mk(OP_EW,  FN_ROWDIV, BM_COL, 1000, 1100, 6400, 1, 1, 1, 4, 0, 40));
    prog.push_back(mk(OP_BN,  FN_RELU, BM_ROW, 1200, 1300, 6500, 2, 2, 2, 3, 0, 150));
    prog.push_back(mk(OP_POOL, FN_RELU, BM_FULL, 1400, 0, 6600, 3, 0, 1, 2, 0, 180));
    prog.push_back(mk(OP_ROWMAX, FN_RELU, BM_FULL, 1600, 0, 6800, 3, 0, 1, 2, 200, 1));
    prog.push_back(mk(OP_ADD, FN_SUB, BM_COL, 1700, 1800, 6900, 1, 1, 1, 3, 0, 10));
    prog.push_back(mk(OP_ACT, FN_SIGMOID, BM_FULL, 1500, 0, 6700, 1, 0, 1, 5, 0, 20));
    prog.push_back(mk(OP_END, FN_RELU, BM_FULL, 0, 0, 0, 0, 0, 0, 0, 0, 0));
    exp_cyc = 1;
    foreach (prog[x]) if (prog[x].op != OP_END) begin
      automatic int nb = q.size();
      expect_call(prog[x]);
      exp_cyc += 3 + (q.size() - nb);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (prog[x]) begin
      imem_we = 1; imem_addr = 5'(x); imem_wdata = prog[x];
      @(negedge clk);
    end
    imem_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (!busy);
    repeat (3) @(negedge clk);
    checks += 3;
    if (q.size() != 0) begin failures++; $display("%0d steps never issued", q.size()); end
    if (ndone != 1) failures++;
    if (longint'(cycles) != exp_cyc) begin failures++; $display("cycles %0d expected %0d", cycles, exp_cyc); end
    $display("%0d steps, %0d cycles", nsteps, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
