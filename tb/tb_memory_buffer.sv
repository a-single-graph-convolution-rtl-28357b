// tb_memory_buffer: writes random vectors to random addresses of a small
// buffer, then reads them back on all three read ports (one cycle latency),
// including a read of a word on the cycle it is written (old value returned).
module tb_memory_buffer;
  import gecco_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [AW-1:0] ra, rb, rc, wa;
  vec_t da, db, dc, wd;
  logic we;
  vec_t model [DEPTH];

  memory_buffer #(.DEPTH(DEPTH)) dut (
    .clk, .ra_addr(ra), .ra_data(da), .rb_addr(rb), .rb_data(db),
    .rc_addr(rc), .rc_data(dc), .we, .wa_addr(wa), .wdata(wd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rand_vec();
    vec_t v;
    for (int l = 0; l < int'(LANES); l++) v[l] = data_t'($urandom);
    return v;
  endfunction

  initial begin
    we = 0; ra = 0; rb = 0; rc = 0; wa = 0; wd = '0;
    // fill
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk);
      we = 1; wa = AW'(i); wd = rand_vec(); model[i] = wd;
    end
    @(negedge clk); we = 0;
    // random reads, some with a simultaneous write to the address read on port A
    for (int t = 0; t < 400; t++) begin
      vec_t ea, eb, ec;
      @(negedge clk);
      ra = AW'($urandom); rb = AW'($urandom); rc = AW'($urandom);
      ea = model[ra]; eb = model[rb]; ec = model[rc];
      we = (t % 3 == 0);
      wa = ra; wd = rand_vec();
      @(posedge clk);
      if (we) model[wa] = wd;
      #1;
      checks += 3;
      if (da != ea) failures++;
      if (db != eb) failures++;
      if (dc != ec) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
