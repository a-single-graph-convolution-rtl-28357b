// gecco_model_pkg: testbench support for whole-model runs. Given the model
// dimensions (batch B, pixels per image P, feature length D, classes C) it
//   - lays the tensors out in the memory buffer (make_layout),
//   - writes the kernel program that runs one inference (make_program),
//   - predicts the run length in cycles from the loop nests (expected_cycles),
//   - draws random images and weights (make_model) and
//   - computes the reference logits with the golden model (ref_forward).
// The program is the model of the paper, layer by layer:
//   X2 = ReLU(X1 W1 + b1); X4' = sigmoid(A X2 W2) with A all ones;
//   batch norm; max pool -> X4; S = sigmoid(X4 X4^T); r = row sums of S;
//   X5 = (S X4) / r; X6 = X5 + X4; logits = X6 Wfc + bfc;
//   probabilities = softmax(logits), as exp(l - max l) / sum exp(l - max l).
package gecco_model_pkg;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;

  localparam int NL = LANES;

  typedef struct {
    int b, p, d, c;
  } dims_t;

  typedef struct {
    int x1, w1, b1, adj, w2, bn, wfc, bfc, t1, t2, t3, x4, s, r, q, lg, mx, pr, sm, total;
  } layout_t;

  typedef struct {
    mat_t x1, w1, b1, adj, w2, bn, wfc, bfc;
  } model_t;

  function automatic int strd(int cols);
    return (cols + NL - 1) / NL;
  endfunction

  function automatic layout_t make_layout(dims_t d);
    layout_t lo;
    int a = 0, h = d.d / 2;
    lo.x1  = a; a += d.b * strd(d.p);
    lo.w1  = a; a += d.p * strd(d.d);
    lo.b1  = a; a += strd(d.d);
    lo.adj = a; a += d.b * strd(d.b);
    lo.w2  = a; a += d.d * strd(d.d);
    lo.bn  = a; a += 2 * strd(d.d);
    lo.wfc = a; a += h * strd(d.c);
    lo.bfc = a; a += strd(d.c);
    lo.t1  = a; a += d.b * strd(d.d);
    lo.t2  = a; a += d.b * strd(d.d);
    lo.t3  = a; a += d.b * strd(d.d);
    lo.x4  = a; a += d.b * strd(h);
    lo.s   = a; a += d.b * strd(d.b);
    lo.r   = a; a += d.b;
    lo.q   = a; a += d.b * strd(h);
    lo.lg  = a; a += d.b * strd(d.c);
    lo.mx  = a; a += d.b;
    lo.pr  = a; a += d.b * strd(d.c);
    lo.sm  = a; a += d.b;
    lo.total = a;
    return lo;
  endfunction

  function automatic instr_t ins(op_e op, fn_e fn, bmode_e bm, int ab, int bb, int cb,
                                 int as, int bs, int cs, int m, int k, int n);
    instr_t i;
    i.op = op; i.fn = fn; i.bmode = bm;
    i.a_base = ADDR_W_MAX'(ab); i.b_base = ADDR_W_MAX'(bb); i.c_base = ADDR_W_MAX'(cb);
    i.a_str = DIM_W'(as); i.b_str = DIM_W'(bs); i.c_str = DIM_W'(cs);
    i.m = DIM_W'(m); i.k = DIM_W'(k); i.n = DIM_W'(n);
    return i;
  endfunction

  function automatic void make_program(dims_t d, layout_t lo, ref instr_t prog[$]);
    int h = d.d / 2;
    int sd = strd(d.d), sh = strd(h), sb = strd(d.b), sc = strd(d.c), sp = strd(d.p);
    prog.delete();
    // fully connected layer + bias + ReLU (dropout is the identity at inference)
    prog.push_back(ins(OP_MM,  FN_RELU, BM_FULL, lo.x1, lo.w1, lo.t1, sp, sd, sd, d.b, d.p, d.d));
    prog.push_back(ins(OP_ADD, FN_RELU, BM_ROW,  lo.t1, lo.b1, lo.t1, sd, 0, sd, d.b, 0, d.d));
    prog.push_back(ins(OP_ACT, FN_RELU, BM_FULL, lo.t1, 0, lo.t1, sd, 0, sd, d.b, 0, d.d));
    // graph convolution sigmoid(A X3 W2), batch norm, max pool
    prog.push_back(ins(OP_MM,  FN_RELU, BM_FULL, lo.adj, lo.t1, lo.t2, sb, sd, sd, d.b, d.b, d.d));
    prog.push_back(ins(OP_MM,  FN_RELU, BM_FULL, lo.t2, lo.w2, lo.t3, sd, sd, sd, d.b, d.d, d.d));
    prog.push_back(ins(OP_ACT, FN_SIGMOID, BM_FULL, lo.t3, 0, lo.t3, sd, 0, sd, d.b, 0, d.d));
    prog.push_back(ins(OP_BN,  FN_RELU, BM_ROW,  lo.t3, lo.bn, lo.t3, sd, sd, sd, d.b, 0, d.d));
    prog.push_back(ins(OP_POOL, FN_RELU, BM_FULL, lo.t3, 0, lo.x4, sd, 0, sh, d.b, 0, d.d));
    // batch-wise attention
    prog.push_back(ins(OP_MMT, FN_RELU, BM_FULL, lo.x4, lo.x4, lo.s, sh, sh, sb, d.b, h, d.b));
    prog.push_back(ins(OP_ACT, FN_SIGMOID, BM_FULL, lo.s, 0, lo.s, sb, 0, sb, d.b, 0, d.b));
    prog.push_back(ins(OP_ROWSUM, FN_RELU, BM_FULL, lo.s, 0, lo.r, sb, 0, 1, d.b, d.b, 1));
    prog.push_back(ins(OP_MM,  FN_RELU, BM_FULL, lo.s, lo.x4, lo.q, sb, sh, sh, d.b, d.b, h));
    prog.push_back(ins(OP_EW,  FN_ROWDIV, BM_COL, lo.q, lo.r, lo.q, sh, 1, sh, d.b, 0, h));
    // residual and output layer
    prog.push_back(ins(OP_ADD, FN_RELU, BM_FULL, lo.q, lo.x4, lo.q, sh, sh, sh, d.b, 0, h));
    prog.push_back(ins(OP_MM,  FN_RELU, BM_FULL, lo.q, lo.wfc, lo.lg, sh, sc, sc, d.b, h, d.c));
    prog.push_back(ins(OP_ADD, FN_RELU, BM_ROW,  lo.lg, lo.bfc, lo.lg, sc, 0, sc, d.b, 0, d.c));
    // softmax over the classes
    prog.push_back(ins(OP_ROWMAX, FN_RELU, BM_FULL, lo.lg, 0, lo.mx, sc, 0, 1, d.b, d.c, 1));
    prog.push_back(ins(OP_ADD, FN_SUB, BM_COL, lo.lg, lo.mx, lo.pr, sc, 1, sc, d.b, 0, d.c));
    prog.push_back(ins(OP_ACT, FN_EXP, BM_FULL, lo.pr, 0, lo.pr, sc, 0, sc, d.b, 0, d.c));
    prog.push_back(ins(OP_ROWSUM, FN_RELU, BM_FULL, lo.pr, 0, lo.sm, sc, 0, 1, d.b, d.c, 1));
    prog.push_back(ins(OP_EW,  FN_ROWDIV, BM_COL, lo.pr, lo.sm, lo.pr, sc, 1, sc, d.b, 0, d.c));
    prog.push_back(ins(OP_END, FN_RELU, BM_FULL, 0, 0, 0, 0, 0, 0, 0, 0, 0));
  endfunction

  // fetch (1) + steps + drain (2) per call, plus the fetch of OP_END
  function automatic longint expected_cycles(instr_t prog[$]);
    longint cyc = 0;
    foreach (prog[x]) begin
      instr_t i = prog[x];
      longint m = i.m, k = i.k, n = i.n;
      cyc += 1;
      case (i.op)
        OP_END:   ;
        OP_MM:    cyc += m * strd(int'(n)) * k + 2;
        OP_MMT, OP_ROWSUM, OP_ROWMAX: cyc += m * n * strd(int'(k)) + 2;
        OP_POOL:  cyc += m * strd(int'(n) / 2) + 2;
        default:  cyc += m * strd(int'(n)) + 2;
      endcase
    end
    return cyc;
  endfunction

  function automatic mat_t rnd(int m, int n, int lo, int hi);
    mat_t c = new_mat(m, n);
    foreach (c[i, j]) c[i][j] = int'($urandom_range(0, hi - lo)) + lo;
    return c;
  endfunction

  function automatic model_t make_model(dims_t d);
    model_t md;
    int h = d.d / 2;
    int wr = int'(2048.0 / $sqrt(real'(d.p))) + 2;
    md.x1  = rnd(d.b, d.p, 0, 255);                 // grey levels in [0, 1)
    md.w1  = rnd(d.p, d.d, -wr, wr);
    md.b1  = rnd(1, d.d, -64, 64);
    md.b1[0][1] = 32000;                            // forces a saturating sum
    md.adj = new_mat(d.b, d.b);
    foreach (md.adj[i, j]) md.adj[i][j] = 256;      // A_ij = 1: all images connected
    md.w2  = rnd(d.d, d.d, -8, 8);
    md.bn  = new_mat(2, d.d);
    foreach (md.bn[0][j]) begin
      md.bn[0][j] = int'($urandom_range(128, 512));   // scale 0.5 .. 2
      md.bn[1][j] = int'($urandom_range(0, 512)) - 256;
    end
    md.wfc = rnd(h, d.c, -128, 128);
    md.bfc = rnd(1, d.c, -256, 256);
    return md;
  endfunction

  // returns the logits; probs gets the softmax output
  function automatic mat_t ref_forward(model_t md, ref int relu_zeros, ref mat_t probs);
    mat_t t1, t3, x4, s, r, q, lg, e;
    t1 = add(mm(md.x1, md.w1), md.b1, 1);
    relu_zeros = 0;
    foreach (t1[i, j]) if (t1[i][j] < 0) relu_zeros++;
    t1 = relu(t1);
    t3 = sigm(mm(mm(md.adj, t1), md.w2));
    t3 = bnorm(t3, md.bn);
    x4 = pool(t3);
    s  = sigm(mmt(x4, x4));
    r  = rowsum(s);
    q  = rowdiv(mm(s, x4), r);
    q  = add(q, x4, 0);
    lg = add(mm(q, md.wfc), md.bfc, 1);
    e  = expm(sub(lg, rowmax(lg)));
    probs = rowdiv(e, rowsum(e));
    return lg;
  endfunction

  // memory image: address -> vector word
  typedef vec_t image_t[int];

  function automatic void put(ref image_t img, mat_t a, int base);
    int s = strd(a[0].size());
    foreach (a[i]) begin
      for (int w = 0; w < s; w++) begin
        vec_t v = '0;
        for (int l = 0; l < NL; l++) begin
          int j = w * NL + l;
          if (j < a[i].size()) v[l] = data_t'(a[i][j]);
        end
        img[base + i * s + w] = v;
      end
    end
  endfunction

  function automatic void build_image(ref image_t img, model_t md, layout_t lo);
    img.delete();
    put(img, md.x1, lo.x1);  put(img, md.w1, lo.w1);  put(img, md.b1, lo.b1);
    put(img, md.adj, lo.adj); put(img, md.w2, lo.w2); put(img, md.bn, lo.bn);
    put(img, md.wfc, lo.wfc); put(img, md.bfc, lo.bfc);
  endfunction

endpackage
