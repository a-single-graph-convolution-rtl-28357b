// tb_gecco_accel: one accelerator instance running three complete inferences
// back to back with different model sizes, each loaded after the previous
// one finished; the third has the shape of the chest X-ray model (feature
// length 112, two classes, batch 64) with smaller images. The graph here is a
// random weighted adjacency instead of the all-ones matrix, so that every
// image of the batch gets different features and row-dependent errors in the
// attention path become visible. Checks all logits and softmax outputs
// against the golden model and the run length against the loop-nest
// prediction.
module tb_gecco_accel;
  import gecco_pkg::*;
  import gecco_ref_pkg::*;
  import gecco_model_pkg::*;

  localparam int DEP = 4096;
  localparam int AW = $clog2(DEP);
  localparam int PW = $clog2(32);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, host_we, imem_we, start, busy, done;
  logic [AW-1:0] host_waddr, host_raddr;
  vec_t host_wdata, host_rdata;
  logic [PW-1:0] imem_addr;
  instr_t imem_wdata;
  logic [31:0] cycles, sat_events;
  op_e cur_op;

  gecco_accel #(.DEPTH(DEP)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(dims_t dm);
    layout_t lo;
    instr_t  prog[$];
    model_t  md;
    mat_t    expv, expp;
    image_t  img;
    int      rz, bad;
    longint  exp_cyc;
    lo = make_layout(dm);
    make_program(dm, lo, prog);
    exp_cyc = expected_cycles(prog);
    md = make_model(dm);
    foreach (md.adj[i, j]) md.adj[i][j] = int'($urandom_range(0, 128));
    expv = ref_forward(md, rz, expp);
    build_image(img, md, lo);
    @(negedge clk);
    foreach (prog[x]) begin
      imem_we = 1; imem_addr = PW'(x); imem_wdata = prog[x];
      @(negedge clk);
    end
    imem_we = 0;
    foreach (img[a]) begin
      host_we = 1; host_waddr = AW'(a); host_wdata = img[a];
      @(negedge clk);
    end
    host_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) failures++;
    @(posedge done);
    @(negedge clk);
    checks++;
    $display("B=%0d P=%0d D=%0d C=%0d: %0d cycles, expected %0d", dm.b, dm.p, dm.d, dm.c, cycles, exp_cyc);
    if (longint'(cycles) != exp_cyc) failures++;
    bad = 0;
    for (int i = 0; i < 2 * dm.b; i++) begin
      automatic bit pr = (i >= dm.b);
      automatic int r = pr ? i - dm.b : i;
      host_raddr = AW'((pr ? lo.pr : lo.lg) + r * strd(dm.c));
      @(negedge clk);
      for (int c = 0; c < NL; c++) begin
        // padding lanes stay zero
        automatic int e = (c >= dm.c) ? 0 : pr ? expp[r][c] : expv[r][c];
        checks++;
        if (int'(host_rdata[c]) != e) begin
          failures++; bad++;
          if (bad < 5) $display("row %0d class %0d: got %0d expected %0d", i, c, host_rdata[c], e);
        end
      end
    end
  endtask

  initial begin
    dims_t d1, d2, d3;
    rst_n = 0; host_we = 0; imem_we = 0; start = 0;
    host_waddr = '0; host_raddr = '0; host_wdata = '0; imem_addr = '0; imem_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    d1.b = 8;  d1.p = 100; d1.d = 40;  d1.c = 3;
    d2.b = 20; d2.p = 200; d2.d = 176; d2.c = 12;
    // chest X-ray shape (feature length 112, two classes, batch 64) with
    // the image cut to 16 x 16 pixels so that it fits this small buffer
    d3.b = 64; d3.p = 256; d3.d = 112; d3.c = 2;
    run(d1);
    run(d2);
    run(d3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
