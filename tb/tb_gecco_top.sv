// tb_gecco_top: end-to-end test of the whole design at reduced size: three
// instances, batch 16, 12x12-pixel images, feature length 180 (so rows span
// two vectors and the pooled rows 90 features), 10 classes.
//
// For each of the NUM_INST accelerator instances the testbench draws its own
// random batch and weights, loads them and the kernel program through the
// host ports, starts all instances together and waits for done. It then
// reads every logit and every softmax output back and compares it with the golden model, checks the
// run length against the cycle count predicted from the loop nests, and
// counts how often each mechanism of the design happened: every kernel type
// executed, saturation, ReLU clipping, rows wider than one vector, all
// instances running at once. A mechanism that never happened is a failure.
module tb_gecco_top;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;
  import gecco_model_pkg::*;

  localparam int NI = 3;
  localparam int DEP = 4096;
  localparam int AW = $clog2(DEP);
  localparam int PW = $clog2(32);

  logic clk = 1'b0;
  always #2.5 clk = ~clk;      // 200 MHz
  int checks = 0, failures = 0;

  logic rst_n;
  logic [NI-1:0]          host_we, imem_we, start, busy, done;
  logic [NI-1:0][AW-1:0]  host_waddr, host_raddr;
  vec_t [NI-1:0]          host_wdata, host_rdata;
  logic [NI-1:0][PW-1:0]  imem_addr;
  instr_t [NI-1:0]        imem_wdata;
  logic [NI-1:0][31:0]    cycles, sat_events;
  op_e  [NI-1:0]          cur_op;

  gecco_top #(.NUM_INST(NI), .DEPTH(DEP)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int op_count[16];
  int all_busy_cycles = 0;
  op_e prev_op[NI];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < NI; g++) begin
        if (cur_op[g] != prev_op[g] && cur_op[g] != OP_END) op_count[int'(cur_op[g])]++;
        prev_op[g] = cur_op[g];
      end
      if (&busy) all_busy_cycles++;
    end
  end

  dims_t   dm;
  layout_t lo;
  instr_t  prog[$];
  model_t  md[NI];
  mat_t    expv[NI];
  mat_t    expp[NI];
  image_t  img[NI];
  int      rz[NI];
  longint  exp_cyc;

  task automatic expect_pos(string what, int v);
    checks++;
    $display("  mechanism %-34s %0d", what, v);
    if (v <= 0) begin
      failures++;
      $display("  mechanism never happened: %s", what);
    end
  endtask

  initial begin
    int wide_rows = 0;
    rst_n = 0;
    host_we = '0; imem_we = '0; start = '0; host_waddr = '0; host_raddr = '0;
    host_wdata = '0; imem_addr = '0; imem_wdata = '0;
    foreach (op_count[x]) op_count[x] = 0;
    for (int g = 0; g < NI; g++) prev_op[g] = OP_END;
    dm.b = 16; dm.p = 144; dm.d = 180; dm.c = 10;
    lo = make_layout(dm);
    make_program(dm, lo, prog);
    exp_cyc = expected_cycles(prog);
    $display("dims B=%0d P=%0d D=%0d C=%0d, buffer words used %0d of %0d", dm.b, dm.p, dm.d, dm.c, lo.total, DEP);
    checks++;
    if (lo.total > DEP) begin failures++; $display("model does not fit the buffer"); end
    foreach (prog[x]) if ((prog[x].op == OP_MM || prog[x].op == OP_ADD) && int'(prog[x].n) > NL) wide_rows++;
    for (int g = 0; g < NI; g++) begin
      md[g] = make_model(dm);
      expv[g] = ref_forward(md[g], rz[g], expp[g]);
      build_image(img[g], md[g], lo);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // one-time load: program, then images and weights (same addresses in every instance)
    foreach (prog[x]) begin
      for (int g = 0; g < NI; g++) begin
        imem_we[g] = 1; imem_addr[g] = PW'(x); imem_wdata[g] = prog[x];
      end
      @(negedge clk);
    end
    imem_we = '0;
    foreach (img[0][a]) begin
      for (int g = 0; g < NI; g++) begin
        host_we[g] = 1; host_waddr[g] = AW'(a); host_wdata[g] = img[g][a];
      end
      @(negedge clk);
    end
    host_we = '0;
    @(negedge clk);
    start = '1;
    @(negedge clk);
    start = '0;
    wait (busy == '0);
    @(negedge clk);
    for (int g = 0; g < NI; g++) begin
      checks++;
      $display("instance %0d: %0d cycles (expected %0d), %.3f ms at 200 MHz, %0d saturating writes",
               g, cycles[g], exp_cyc, real'(cycles[g]) * 5.0e-6, sat_events[g]);
      if (longint'(cycles[g]) != exp_cyc) failures++;
    end
    $display("throughput of %0d instances: %.2f images/ms", NI, real'(NI * dm.b) / (real'(cycles[0]) * 5.0e-6));
    // read back logits and class probabilities
    for (int g = 0; g < NI; g++) begin
      int bad = 0;
      for (int w = 0; w < 2; w++) begin
        for (int i = 0; i < dm.b; i++) begin
          host_raddr[g] = AW'((w == 0 ? lo.lg : lo.pr) + i * strd(dm.c));
          @(negedge clk);
          for (int c = 0; c < dm.c; c++) begin
            automatic int e = (w == 0) ? expv[g][i][c] : expp[g][i][c];
            checks++;
            if (int'(host_rdata[g][c]) != e) begin
              failures++; bad++;
              if (bad < 5) $display("instance %0d %s image %0d class %0d: got %0d expected %0d",
                                    g, w == 0 ? "logit" : "prob", i, c, host_rdata[g][c], e);
            end
          end
        end
      end
      begin
        int best = 0;
        for (int c = 1; c < dm.c; c++) if (expp[g][0][c] > expp[g][0][best]) best = c;
        $display("instance %0d: image 0 classified as class %0d (p = %.3f)", g, best, real'(expp[g][0][best]) / 256.0);
      end
    end
    $display("mechanisms:");
    expect_pos("fully connected / matmul calls", op_count[int'(OP_MM)]);
    expect_pos("X4*X4^T calls", op_count[int'(OP_MMT)]);
    expect_pos("row-wise summation calls", op_count[int'(OP_ROWSUM)]);
    expect_pos("matrix addition calls", op_count[int'(OP_ADD)]);
    expect_pos("activation calls", op_count[int'(OP_ACT)]);
    expect_pos("batch normalisation calls", op_count[int'(OP_BN)]);
    expect_pos("max pooling calls", op_count[int'(OP_POOL)]);
    expect_pos("elementwise (row division) calls", op_count[int'(OP_EW)]);
    expect_pos("row maximum (softmax) calls", op_count[int'(OP_ROWMAX)]);
    expect_pos("saturating result writes", int'(sat_events[0]));
    expect_pos("ReLU-clipped features", rz[0]);
    expect_pos("cycles with all instances busy", all_busy_cycles);
    expect_pos("calls on rows wider than one vector", wide_rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
