// gecco_top: the deployed design, NUM_INST independent accelerator
// instances, one per super logic region (the paper places one instance in
// each of the three SLRs of the FPGA to triple throughput). Each instance
// takes its own batch; ports are per-instance arrays of the gecco_accel
// ports. The host link (PCIe) and the DDR banks that supply the data are
// outside this design: their traffic arrives here as the host_* and imem_*
// write ports.
module gecco_top
  import gecco_pkg::*;
#(
  parameter int unsigned NUM_INST   = 3,
  parameter int unsigned DEPTH      = 32768,
  parameter int unsigned ADDR_W     = $clog2(DEPTH),
  parameter int unsigned IMEM_DEPTH = 32,
  parameter int unsigned PC_W       = $clog2(IMEM_DEPTH)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NUM_INST-1:0]                host_we,
  input  logic [NUM_INST-1:0][ADDR_W-1:0]    host_waddr,
  input  vec_t [NUM_INST-1:0]                host_wdata,
  input  logic [NUM_INST-1:0][ADDR_W-1:0]    host_raddr,
  output vec_t [NUM_INST-1:0]                host_rdata,
  input  logic [NUM_INST-1:0]                imem_we,
  input  logic [NUM_INST-1:0][PC_W-1:0]      imem_addr,
  input  instr_t [NUM_INST-1:0]              imem_wdata,
  input  logic [NUM_INST-1:0]                start,
  output logic [NUM_INST-1:0]                busy,
  output logic [NUM_INST-1:0]                done,
  output logic [NUM_INST-1:0][31:0]          cycles,
  output logic [NUM_INST-1:0][31:0]          sat_events,
  output op_e  [NUM_INST-1:0]                cur_op
);

  for (genvar g = 0; g < int'(NUM_INST); g++) begin : g_inst
    gecco_accel #(.DEPTH(DEPTH), .ADDR_W(ADDR_W), .IMEM_DEPTH(IMEM_DEPTH)) u_accel (
      .clk, .rst_n,
      .host_we   (host_we[g]),
      .host_waddr(host_waddr[g]),
      .host_wdata(host_wdata[g]),
      .host_raddr(host_raddr[g]),
      .host_rdata(host_rdata[g]),
      .imem_we   (imem_we[g]),
      .imem_addr (imem_addr[g]),
      .imem_wdata(imem_wdata[g]),
      .start     (start[g]),
      .busy      (busy[g]),
      .done      (done[g]),
      .cycles    (cycles[g]),
      .sat_events(sat_events[g]),
      .cur_op    (cur_op[g])
    );
  end

endmodule
