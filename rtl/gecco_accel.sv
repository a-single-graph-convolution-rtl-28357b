// gecco_accel: one GECCO accelerator instance, sized to fit one super logic
// region of the FPGA: control unit, memory buffer and compute unit.
//
// Use: while idle, the host writes the images, weights and constants into the
// memory buffer (host_we/host_waddr/host_wdata, one vector word per cycle) and
// the kernel program into the instruction memory (imem_*); it then pulses
// start. The control unit runs the program, reading and writing only the
// on-chip buffer (the paper's single-load strategy: nothing returns to DDR
// between layers). When done pulses, cycles holds the run length and the
// host reads the logits back through host_raddr/host_rdata (one cycle read
// latency). sat_events counts result words in which some lane saturated.
// While busy the buffer ports belong to the control unit and host writes are
// ignored (an assertion flags them).
module gecco_accel
  import gecco_pkg::*;
#(
  parameter int unsigned DEPTH      = 32768,
  parameter int unsigned ADDR_W     = $clog2(DEPTH),
  parameter int unsigned IMEM_DEPTH = 32,
  parameter int unsigned PC_W       = $clog2(IMEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_we,
  input  logic [ADDR_W-1:0] host_waddr,
  input  vec_t              host_wdata,
  input  logic [ADDR_W-1:0] host_raddr,
  output vec_t              host_rdata,
  input  logic              imem_we,
  input  logic [PC_W-1:0]   imem_addr,
  input  instr_t            imem_wdata,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  output logic [31:0]       sat_events,
  output op_e               cur_op
);

  logic [ADDR_W-1:0] c_ra, c_rb, c_rc, ra, wa, cu_waddr;
  vec_t              rd_a, rd_b, rd_c, wd, cu_wdata;
  logic              we, cu_we, sat_evt;
  step_t             step;

  control_unit #(.ADDR_W(ADDR_W), .IMEM_DEPTH(IMEM_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .imem_we, .imem_addr, .imem_wdata,
    .start, .busy, .done, .cycles, .cur_op,
    .ra_addr(c_ra), .rb_addr(c_rb), .rc_addr(c_rc),
    .step
  );

  // host access while idle
  assign ra = busy ? c_ra : host_raddr;
  assign we = busy ? cu_we : host_we;
  assign wa = busy ? cu_waddr : host_waddr;
  assign wd = busy ? cu_wdata : host_wdata;
  assign host_rdata = rd_a;

  memory_buffer #(.DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_mem (
    .clk,
    .ra_addr(ra), .ra_data(rd_a),
    .rb_addr(c_rb), .rb_data(rd_b),
    .rc_addr(c_rc), .rc_data(rd_c),
    .we, .wa_addr(wa), .wdata(wd)
  );

  compute_unit #(.ADDR_W(ADDR_W)) u_cu (
    .clk, .rst_n,
    .step,
    .ra(rd_a), .rb(rd_b), .rc(rd_c),
    .we(cu_we), .waddr(cu_waddr), .wdata(cu_wdata),
    .sat_evt
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              sat_events <= '0;
    else if (start && !busy) sat_events <= '0;
    else if (sat_evt)        sat_events <= sat_events + 1;
  end

  a_no_host_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !host_we)
    else $error("host write while the accelerator is busy");

endmodule
