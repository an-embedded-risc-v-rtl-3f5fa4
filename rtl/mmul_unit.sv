// mmul_unit: the MMUL custom instruction, a radix-2 Montgomery multiplier
// (R2MM) working on operands in memory.
//
// MMUL computes S = A * B * 2^-n mod N for n-bit operands, n = 32 * WORDS,
// with WORDS (1..MAX_BITS/32) taken from the instruction's length field. The
// operands must satisfy A, B < N and N odd. R2MM, per bit i of A:
//     T = S + a_i * B            (cycle 1 of the iteration)
//     S = (T + T[0] * N) / 2     (cycle 2 of the iteration)
// followed, after n iterations, by one conditional subtraction S >= N ? S-N.
// S stays below 2N, so it and T need MAX_BITS+2 bits.
//
// The unit owns the whole instruction, as in the paper: it selects which
// register holds the base address it needs (reg_sel: 0 = rs1 for A, 1 = rs2
// for B, 2 = rs3 for N, 3 = rd for the result), supplies the byte offset that
// the core's ALU adds to that base, and triggers the LSU. It loads all three
// operands first, 3*WORDS pipelined word reads, keeps them in its own
// registers for the whole operation, and finally writes WORDS result words.
// Data returns from the LSU one cycle after each read; the last read lands
// during the first iteration cycle, which does not use N yet.
//
// Timing, with `start` held high while the instruction sits in the execute
// stage and `done` high in its last cycle:
//   atomic (partial = 0): 3*WORDS + 2n + 1 + WORDS cycles.
//   partial (partial = 1): the instruction retires after every iteration, so
//     n instructions make one multiplication. The first call loads and does
//     iteration 0 (3*WORDS + 2 cycles), each middle call does one iteration
//     (2 cycles) and the n-th does the last iteration, the subtraction and the
//     stores (WORDS + 3 cycles). Between calls the operands and S stay here
//     (`active`), so other code, such as an interrupt handler, may run as
//     long as it issues no MMUL.
// The algorithm, the 2-cycle iteration, the extra subtraction cycle, the load
// and store counts and the partial execution scheme follow the paper. The
// per-cycle split of the iteration and the pipelining of the loads are this
// design's choices. An atomic call made while a partial multiplication is
// active finishes the remaining iterations.
module mmul_unit #(
  parameter int unsigned MAX_BITS = 128,
  localparam int unsigned MAXW = MAX_BITS / 32,
  localparam int unsigned WW   = (MAXW > 1) ? $clog2(MAXW) : 1,
  localparam int unsigned IW   = $clog2(MAX_BITS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction in the execute stage
  input  logic        start,
  input  logic        partial,     // execution mode select (CSR)
  input  logic [4:0]  len,         // operand length in words, less one
  output logic        len_ok,      // len fits this implementation
  output logic        done,
  // datapath: base register select and offset to the ALU
  output logic [1:0]  reg_sel,
  output logic [31:0] offset,
  // LSU
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_wdata,
  input  logic [31:0] mem_rdata,
  input  logic        mem_rvalid,
  // status
  output logic        active,
  output logic        busy
);
  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_ITER1, S_ITER2, S_SUB, S_STORE } state_e;

  localparam int unsigned SW = MAX_BITS + 2;

  state_e state, eff;
  logic [MAX_BITS-1:0] a_r, b_r, n_r;
  logic [SW-1:0]       s_r, t_r;
  logic [IW-1:0]       iter;
  logic [IW-1:0]       last_iter;
  logic [1:0]          ld_op;
  logic [WW-1:0]       ld_w, st_w, wlast;
  logic                ld_pend;
  logic [1:0]          ld_dst_op;
  logic [WW-1:0]       ld_dst_w;

  assign len_ok = (len < 5'(MAXW));
  assign wlast  = WW'(len);

  always_comb begin
    eff = state;
    if (state == S_IDLE) eff = start ? (active ? S_ITER1 : S_LOAD) : S_IDLE;
  end

  // iteration step values
  logic [SW-1:0] t_next, s_step;
  logic [SW-1:0] s_sub;
  assign t_next = s_r + (a_r[iter] ? SW'(b_r) : '0);
  assign s_step = (t_r + (t_r[0] ? SW'(n_r) : '0)) >> 1;
  assign s_sub  = (s_r >= SW'(n_r)) ? s_r - SW'(n_r) : s_r;

  // outputs
  always_comb begin
    reg_sel   = 2'd0;
    offset    = '0;
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_wdata = s_r[32*st_w +: 32];
    done      = 1'b0;
    unique case (eff)
      S_LOAD: begin
        reg_sel = ld_op;
        offset  = {{(30-WW){1'b0}}, ld_w, 2'b00};
        mem_req = 1'b1;
      end
      S_ITER2: done = (iter != last_iter) && partial;
      S_STORE: begin
        reg_sel = 2'd3;
        offset  = {{(30-WW){1'b0}}, st_w, 2'b00};
        mem_req = 1'b1;
        mem_we  = 1'b1;
        done    = (st_w == wlast);
      end
      default: ;
    endcase
  end

  assign busy = (eff != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      a_r       <= '0;
      b_r       <= '0;
      n_r       <= '0;
      s_r       <= '0;
      t_r       <= '0;
      iter      <= '0;
      last_iter <= '0;
      ld_op     <= '0;
      ld_w      <= '0;
      st_w      <= '0;
      ld_pend   <= 1'b0;
      ld_dst_op <= '0;
      ld_dst_w  <= '0;
      active    <= 1'b0;
    end else begin
      // capture returning operand words
      ld_pend <= (eff == S_LOAD);
      if (eff == S_LOAD) begin
        ld_dst_op <= ld_op;
        ld_dst_w  <= ld_w;
      end
      if (ld_pend && mem_rvalid) begin
        unique case (ld_dst_op)
          2'd0:    a_r[32*ld_dst_w +: 32] <= mem_rdata;
          2'd1:    b_r[32*ld_dst_w +: 32] <= mem_rdata;
          default: n_r[32*ld_dst_w +: 32] <= mem_rdata;
        endcase
      end

      unique case (eff)
        S_LOAD: begin
          if (state == S_IDLE) begin
            // new multiplication: clear operands and accumulator
            a_r       <= '0;
            b_r       <= '0;
            n_r       <= '0;
            s_r       <= '0;
            iter      <= '0;
            last_iter <= IW'({len, 5'b11111});  // 32*WORDS - 1
            active    <= 1'b1;
          end
          if (ld_w == wlast) begin
            ld_w <= '0;
            if (ld_op == 2'd2) begin
              ld_op <= '0;
              state <= S_ITER1;
            end else begin
              ld_op <= ld_op + 2'd1;
              state <= S_LOAD;
            end
          end else begin
            ld_w  <= ld_w + 1'b1;
            state <= S_LOAD;
          end
        end
        S_ITER1: begin
          t_r   <= t_next;
          state <= S_ITER2;
        end
        S_ITER2: begin
          s_r  <= s_step;
          iter <= iter + 1'b1;
          if (iter == last_iter) state <= S_SUB;
          else if (partial)      state <= S_IDLE;
          else                   state <= S_ITER1;
        end
        S_SUB: begin
          s_r   <= s_sub;
          st_w  <= '0;
          state <= S_STORE;
        end
        S_STORE: begin
          if (st_w == wlast) begin
            st_w   <= '0;
            active <= 1'b0;
            state  <= S_IDLE;
          end else begin
            st_w  <= st_w + 1'b1;
            state <= S_STORE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The instruction must stay in the execute stage until the unit is done.
  a_hold_start: assert property (@(posedge clk) disable iff (!rst_n)
    (state != S_IDLE) |-> start);
endmodule
