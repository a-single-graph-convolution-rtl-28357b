// memory_buffer: the on-chip buffer that holds every tensor of an inference:
// the batch of images, all weights, and the intermediate results. The paper's
// single-load strategy brings inputs and weights from DDR once; after that
// every layer reads and writes only this buffer.
//
// DEPTH words of one vector (LANES x DATA_W bits) each. Three synchronous
// read ports (A, B and C, one cycle latency: address on cycle t, data on
// t+1) feed the compute unit the operands of one kernel step; one write port
// takes its result. Reads of a word written in the same cycle return the old
// value. The host side (load and readback) is multiplexed onto port A and the
// write port by the accelerator wrapper while the control unit is idle.
// Port count and organisation are this design's choice; the paper gives only
// the buffer's role. Written as an array, it maps to BRAM/URAM.
module memory_buffer
  import gecco_pkg::*;
#(
  parameter int unsigned DEPTH  = 32768,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [ADDR_W-1:0] ra_addr,
  output vec_t              ra_data,
  input  logic [ADDR_W-1:0] rb_addr,
  output vec_t              rb_data,
  input  logic [ADDR_W-1:0] rc_addr,
  output vec_t              rc_data,
  input  logic              we,
  input  logic [ADDR_W-1:0] wa_addr,
  input  vec_t              wdata
);

  vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wa_addr] <= wdata;
    ra_data <= mem[ra_addr];
    rb_data <= mem[rb_addr];
    rc_data <= mem[rc_addr];
  end

endmodule
