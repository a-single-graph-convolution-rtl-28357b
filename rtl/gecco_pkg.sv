// gecco_pkg: types and constants shared by the GECCO accelerator.
//
// Numbers are signed fixed point, DATA_W bits with FRAC fraction bits (Q8.8
// by default). Everything the compute unit handles is a "vector": LANES such
// numbers side by side, which is also one word of the memory buffer. A matrix
// lives in the buffer row-major, each row padded to a whole number of vector
// words ("stride"), padding lanes held at zero.
//
// The control unit runs a short program of kernel calls (instr_t), one per
// step of the model: the paper maps every layer onto shared kernel units
// (matrix multiplication, matrix addition, elementwise operations, activation,
// batch normalisation, max pooling). The instruction format, the number
// format and LANES are this design's own choices; the paper does not give them.
package gecco_pkg;

  // Vector width. 86 equals the MSTAR feature length, so the first fully
  // connected layer produces one full output row per pass over the image.
  parameter int unsigned LANES  = 86;
  parameter int unsigned DATA_W = 16;
  parameter int unsigned FRAC   = 8;
  parameter int unsigned ACC_W  = 48;
  // Extra fraction bits of the reciprocal used for row normalisation.
  parameter int unsigned RECIP_FRAC = 16;
  parameter int unsigned DIM_W  = 16;   // element counts and strides
  parameter int unsigned LANE_W = $clog2(LANES);

  typedef logic signed [DATA_W-1:0] data_t;
  typedef data_t [LANES-1:0]        vec_t;

  localparam data_t DATA_MAX = data_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam data_t DATA_MIN = data_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Kernel calls.
  typedef enum logic [3:0] {
    OP_END    = 4'd0,  // end of program
    OP_MM     = 4'd1,  // C[MxN] = A[MxK] * B[KxN]          (matmul unit)
    OP_MMT    = 4'd2,  // C[MxN] = A[MxK] * B[NxK]^T        (matmul unit)
    OP_ROWSUM = 4'd3,  // C[Mx1] = sum over columns of A[MxK] (matmul unit)
    OP_ADD    = 4'd4,  // C = A + B                          (matrix addition)
    OP_ACT    = 4'd5,  // C = f(A)                           (activation)
    OP_BN     = 4'd6,  // C = A * scale + shift              (batch normalisation)
    OP_POOL   = 4'd7,  // C[Mx(N/2)] = pairwise max of A[MxN] (max pooling)
    OP_EW     = 4'd8,  // C = A .* B or C = A / b_row        (elementwise)
    OP_ROWMAX = 4'd9   // C[Mx1] = max over columns of A[MxK] (max pooling)
  } op_e;

  // Function selector inside a unit.
  typedef enum logic [2:0] {
    FN_RELU    = 3'd0,  // OP_ACT
    FN_SIGMOID = 3'd1,  // OP_ACT
    FN_MUL     = 3'd2,  // OP_EW: Hadamard product
    FN_ROWDIV  = 3'd3,  // OP_EW: divide each row by a per-row scalar
    FN_EXP     = 3'd4,  // OP_ACT: exponential (softmax numerator)
    FN_SUB     = 3'd5   // OP_ADD: C = A - B instead of A + B
  } fn_e;

  // How the B operand of an elementwise-class call is addressed.
  typedef enum logic [1:0] {
    BM_FULL = 2'd0,  // same shape as A
    BM_ROW  = 2'd1,  // one row, broadcast down the columns (bias)
    BM_COL  = 2'd2   // one value per row, lane 0 of a Mx1 matrix
  } bmode_e;

  localparam int unsigned ADDR_W_MAX = 24;

  typedef struct packed {
    op_e                    op;
    fn_e                    fn;
    bmode_e                 bmode;
    logic [ADDR_W_MAX-1:0]  a_base;
    logic [ADDR_W_MAX-1:0]  b_base;
    logic [ADDR_W_MAX-1:0]  c_base;
    logic [DIM_W-1:0]       a_str;   // vector words per row of A
    logic [DIM_W-1:0]       b_str;   // vector words per row of B
    logic [DIM_W-1:0]       c_str;   // vector words per row of C
    logic [DIM_W-1:0]       m;       // rows of A and C
    logic [DIM_W-1:0]       k;       // inner dimension (OP_MM, OP_MMT, OP_ROWSUM, OP_ROWMAX)
    logic [DIM_W-1:0]       n;       // columns of C (OP_POOL: columns of A)
  } instr_t;

  // One kernel step travelling from the control unit to the compute unit,
  // alongside the operands read from the memory buffer.
  typedef struct packed {
    logic                   valid;
    op_e                    op;
    fn_e                    fn;
    bmode_e                 bmode;
    logic [LANE_W-1:0]      a_lane;   // OP_MM: lane of A's word holding a[i][k]
    logic [DIM_W-1:0]       k_lim;    // OP_MMT/ROWSUM/ROWMAX: valid lanes of this chunk
    logic                   first;    // first step of an accumulation
    logic                   last;     // last step: a result is produced
    logic [LANE_W-1:0]      out_lane; // OP_MMT/ROWSUM/ROWMAX: lane of the scalar result
    logic                   flush;    // OP_MMT/ROWSUM/ROWMAX: emit the assembled vector
    logic [DIM_W-1:0]       out_lim;  // valid lanes of the output vector
    logic [ADDR_W_MAX-1:0]  waddr;    // where the result goes
  } step_t;

  // Saturate a wide signed value to data_t.
  function automatic data_t sat(input logic signed [ACC_W-1:0] v);
    if (v > ACC_W'(DATA_MAX))      return DATA_MAX;
    else if (v < ACC_W'(signed'(DATA_MIN))) return DATA_MIN;
    else                           return data_t'(v);
  endfunction

  function automatic bit is_sat(input logic signed [ACC_W-1:0] v);
    return (v > ACC_W'(DATA_MAX)) || (v < ACC_W'(signed'(DATA_MIN)));
  endfunction

endpackage
