// control_unit: runs the model layer by layer. The host loads a short
// program into the instruction memory; each instruction is one kernel call
// (matrix multiplication, addition, activation, batch normalisation, max
// pooling, elementwise operation) on matrices held in the memory buffer, and
// the program as a whole is the result of the paper's hardware mapping
// algorithm: every layer of the model is mapped onto the shared units.
//
// For the current call the unit walks the loop nest of that kernel and
// issues one step per cycle: the three read addresses of the memory buffer
// (this cycle) and a step_t descriptor (registered, so it reaches the compute
// unit together with the read data one cycle later). Loop nests:
//   OP_MM      rows i, output chunks j, inner index k   (M * ceil(N/L) * K steps)
//   OP_MMT/ROWSUM/ROWMAX rows i, output columns n, inner chunks
//                                                   (M * N * ceil(K/L))
//   others     rows i, output chunks j                 (M * ceil(N/L))
// After the last step of a call it waits DRAIN cycles until the last result
// is written, so a call may read what the previous one wrote. `start` (one
// cycle, while idle) runs the program from address 0 to OP_END; `done`
// pulses when it ends and `cycles` holds the length of the run in clock
// cycles. Program format, loop order and drain are this design's choices.
module control_unit
  import gecco_pkg::*;
#(
  parameter int unsigned ADDR_W      = 15,
  parameter int unsigned IMEM_DEPTH  = 32,
  parameter int unsigned PC_W        = $clog2(IMEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // program load (while idle)
  input  logic              imem_we,
  input  logic [PC_W-1:0]   imem_addr,
  input  instr_t            imem_wdata,
  // run control
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  output op_e               cur_op,     // kernel being executed (for monitoring)
  // memory buffer read addresses
  output logic [ADDR_W-1:0] ra_addr,
  output logic [ADDR_W-1:0] rb_addr,
  output logic [ADDR_W-1:0] rc_addr,
  // step for the compute unit, aligned with the read data
  output step_t             step
);

  localparam logic [DIM_W-1:0] L = DIM_W'(LANES);
  localparam int unsigned DRAIN = 2;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_RUN, S_DRAIN} state_e;

  instr_t imem [IMEM_DEPTH];
  instr_t ins;
  state_e state;
  logic [PC_W-1:0]   pc;
  logic [1:0]        drain_cnt;

  // loop counters
  logic [DIM_W-1:0]      i;        // row
  logic [DIM_W-1:0]      jc, jb;   // output chunk index and its first element
  logic [DIM_W-1:0]      nn;       // output column (OP_MMT)
  logic [LANE_W-1:0]     n_lane;   // nn mod LANES
  logic [DIM_W-1:0]      kk;       // inner index (OP_MM)
  logic [LANE_W-1:0]     k_lane;   // kk mod LANES
  logic [DIM_W-1:0]      kc, kb;   // inner chunk (OP_MM: kk / LANES) and first element
  logic [ADDR_W-1:0]     a_row, b_ptr, c_row;

  always_ff @(posedge clk) begin
    if (imem_we && state == S_IDLE) imem[imem_addr] <= imem_wdata;
  end

  logic is_mmt;
  logic [DIM_W-1:0] nout;
  assign is_mmt = (ins.op == OP_MMT) || (ins.op == OP_ROWSUM) || (ins.op == OP_ROWMAX);
  assign nout   = (ins.op == OP_POOL) ? (ins.n >> 1) : ins.n;
  assign cur_op = (state == S_RUN || state == S_DRAIN) ? ins.op : OP_END;
  assign busy   = (state != S_IDLE);

  // ---- the step issued this cycle -------------------------------------
  step_t s0;
  logic  row_end, call_end;

  always_comb begin
    s0       = '0;
    ra_addr  = a_row;
    rb_addr  = b_ptr;
    rc_addr  = '0;
    row_end  = 1'b0;
    s0.valid = (state == S_RUN);
    s0.op    = ins.op;
    s0.fn    = ins.fn;
    s0.bmode = ins.bmode;
    if (ins.op == OP_MM) begin
      ra_addr    = a_row + ADDR_W'(kc);
      rb_addr    = b_ptr + ADDR_W'(jc);
      s0.a_lane  = k_lane;
      s0.first   = (kk == '0);
      s0.last    = (kk == ins.k - 1'b1);
      s0.out_lim = ins.n - jb;
      s0.waddr   = ADDR_W_MAX'(c_row + ADDR_W'(jc));
      row_end    = s0.last && (jb + L >= ins.n);
    end else if (is_mmt) begin
      ra_addr    = a_row + ADDR_W'(kc);
      rb_addr    = b_ptr + ADDR_W'(kc);
      s0.k_lim   = ins.k - kb;
      s0.first   = (kc == '0);
      s0.last    = (kb + L >= ins.k);
      s0.out_lane = n_lane;
      s0.flush   = s0.last && ((n_lane == LANE_W'(LANES - 1)) || (nn == ins.n - 1'b1));
      s0.out_lim = ins.n - jb;
      s0.waddr   = ADDR_W_MAX'(c_row + ADDR_W'(jc));
      row_end    = s0.last && (nn == ins.n - 1'b1);
    end else begin
      s0.first   = 1'b1;
      s0.last    = 1'b1;
      s0.out_lim = nout - jb;
      s0.waddr   = ADDR_W_MAX'(c_row + ADDR_W'(jc));
      if (ins.op == OP_POOL) begin
        ra_addr = a_row + ADDR_W'(2 * jc);
        rc_addr = a_row + ADDR_W'(2 * jc + 1);
      end else begin
        ra_addr = a_row + ADDR_W'(jc);
        rc_addr = ADDR_W'(ins.b_base) + ADDR_W'(ins.b_str) + ADDR_W'(jc);
        unique case (ins.bmode)
          BM_ROW:  rb_addr = ADDR_W'(ins.b_base) + ADDR_W'(jc);
          BM_COL:  rb_addr = b_ptr;
          default: rb_addr = b_ptr + ADDR_W'(jc);
        endcase
      end
      row_end = (jb + L >= nout);
    end
    call_end = row_end && (i == ins.m - 1'b1);
  end

  // ---- sequencing -------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc <= '0; drain_cnt <= '0;
      ins <= '0;
      i <= '0; jc <= '0; jb <= '0; nn <= '0; n_lane <= '0;
      kk <= '0; k_lane <= '0; kc <= '0; kb <= '0;
      a_row <= '0; b_ptr <= '0; c_row <= '0;
      step <= '0;
      done <= 1'b0;
      cycles <= '0;
    end else begin
      step <= s0;
      done <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          pc     <= '0;
          cycles <= '0;
          state  <= S_FETCH;
        end
        S_FETCH: begin
          ins <= imem[pc];
          i <= '0; jc <= '0; jb <= '0; nn <= '0; n_lane <= '0;
          kk <= '0; k_lane <= '0; kc <= '0; kb <= '0;
          a_row <= ADDR_W'(imem[pc].a_base);
          b_ptr <= ADDR_W'(imem[pc].b_base);
          c_row <= ADDR_W'(imem[pc].c_base);
          if (imem[pc].op == OP_END) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RUN;
          end
        end
        S_RUN: begin
          if (ins.op == OP_MM) begin
            if (!s0.last) begin
              kk    <= kk + 1'b1;
              b_ptr <= b_ptr + ADDR_W'(ins.b_str);
              if (k_lane == LANE_W'(LANES - 1)) begin
                k_lane <= '0;
                kc     <= kc + 1'b1;
              end else begin
                k_lane <= k_lane + 1'b1;
              end
            end else begin
              kk <= '0; k_lane <= '0; kc <= '0;
              b_ptr <= ADDR_W'(ins.b_base);
              if (row_end) begin
                jc <= '0; jb <= '0;
                i <= i + 1'b1;
                a_row <= a_row + ADDR_W'(ins.a_str);
                c_row <= c_row + ADDR_W'(ins.c_str);
              end else begin
                jc <= jc + 1'b1;
                jb <= jb + L;
              end
            end
          end else if (is_mmt) begin
            if (!s0.last) begin
              kc <= kc + 1'b1;
              kb <= kb + L;
            end else begin
              kc <= '0; kb <= '0;
              if (row_end) begin
                nn <= '0; n_lane <= '0; jc <= '0; jb <= '0;
                b_ptr <= ADDR_W'(ins.b_base);
                i <= i + 1'b1;
                a_row <= a_row + ADDR_W'(ins.a_str);
                c_row <= c_row + ADDR_W'(ins.c_str);
              end else begin
                nn <= nn + 1'b1;
                b_ptr <= b_ptr + ADDR_W'(ins.b_str);
                if (n_lane == LANE_W'(LANES - 1)) begin
                  n_lane <= '0;
                  jc <= jc + 1'b1;
                  jb <= jb + L;
                end else begin
                  n_lane <= n_lane + 1'b1;
                end
              end
            end
          end else begin
            if (row_end) begin
              jc <= '0; jb <= '0;
              i <= i + 1'b1;
              a_row <= a_row + ADDR_W'(ins.a_str);
              b_ptr <= b_ptr + ADDR_W'(ins.b_str);
              c_row <= c_row + ADDR_W'(ins.c_str);
            end else begin
              jc <= jc + 1'b1;
              jb <= jb + L;
            end
          end
          if (call_end) begin
            state     <= S_DRAIN;
            drain_cnt <= 2'(DRAIN - 1);
          end
        end
        S_DRAIN: begin
          if (drain_cnt == '0) begin
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end else begin
            drain_cnt <= drain_cnt - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
