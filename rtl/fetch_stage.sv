// fetch_stage: first stage of the 2-stage RV32EC pipeline.
//
// Fetches aligned 32-bit words from an instruction memory with a fixed read
// latency of one cycle and turns them into a stream of instructions that may
// be 16 or 32 bits long and 16-bit aligned (C extension). Returned words are
// split into halfwords and appended to a 6-entry halfword queue; the
// instruction at the head of the queue is offered to the execute stage,
// compressed ones already expanded to 32 bits by rvc_expander. A new word is
// requested whenever the queue, counting the word arriving this cycle, holds
// at most four halfwords, which keeps a sequential stream of 32-bit
// instructions flowing at one per cycle and guarantees room for every
// response. A redirect (taken branch, jump, trap or mret) empties the queue
// and requests the target word in the same cycle, so the target reaches the
// execute stage two cycles later (one bubble). A target in the upper half of
// a word keeps only that half. After reset the stage starts at BOOT_ADDR.
//
// Interface: imem_req/imem_addr (word address, bits 1:0 zero) with
// imem_rdata valid on the following cycle; instr_valid/instr/instr_pc/
// instr_c/instr_illegal_c out, instr_ready in (the execute stage takes the
// instruction when both are high); redirect/redirect_pc in.
// The paper names a fetch stage and the RV32EC ISA; queue depth, request
// policy and redirect timing are this design's choices.
module fetch_stage #(
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction memory
  output logic        imem_req,
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // to the execute stage
  output logic        instr_valid,
  output logic [31:0] instr,
  output logic [31:0] instr_pc,
  output logic        instr_c,          // 16-bit instruction
  output logic        instr_illegal_c,  // reserved compressed encoding
  input  logic        instr_ready,
  // control flow change
  input  logic        redirect,
  input  logic [31:0] redirect_pc
);
  localparam int unsigned QD = 6;

  logic [15:0] q [QD];
  logic [2:0]  cnt;
  logic [31:0] q_pc;
  logic [31:0] fetch_addr;
  logic        rsp_pend, skip_low, boot;

  // head instruction
  logic [31:0] c_exp;
  logic        c_ill;
  rvc_expander u_rvc (.ci(q[0]), .inst(c_exp), .illegal(c_ill));

  assign instr_c         = (q[0][1:0] != 2'b11);
  assign instr_valid     = (cnt >= 3'd2) || (cnt == 3'd1 && instr_c);
  assign instr           = instr_c ? c_exp : {q[1], q[0]};
  assign instr_illegal_c = instr_c & c_ill;
  assign instr_pc        = q_pc;

  // redirect, including the initial jump to BOOT_ADDR
  logic        redir;
  logic [31:0] target;
  assign redir  = redirect | boot;
  assign target = boot ? BOOT_ADDR : redirect_pc;

  logic [2:0] n_cons, n_in;
  logic [31:0] in_data;
  assign n_cons  = (instr_valid && instr_ready) ? (instr_c ? 3'd1 : 3'd2) : 3'd0;
  assign n_in    = rsp_pend ? (skip_low ? 3'd1 : 3'd2) : 3'd0;
  assign in_data = skip_low ? {16'b0, imem_rdata[31:16]} : imem_rdata;

  assign imem_req  = redir || ({1'b0, cnt} + {1'b0, n_in} <= 4'd4);
  assign imem_addr = redir ? {target[31:2], 2'b00} : fetch_addr;

  // next queue contents
  logic [15:0] q_nxt [QD];
  logic [2:0]  cnt_nxt;
  always_comb begin
    cnt_nxt = cnt - n_cons;
    for (int i = 0; i < QD; i++) begin
      q_nxt[i] = (i + int'(n_cons) < QD) ? q[i + int'(n_cons)] : 16'h0;
    end
    if (n_in != 0) begin
      for (int i = 0; i < QD; i++) begin
        if (i == int'(cnt_nxt))          q_nxt[i] = in_data[15:0];
        else if (i == int'(cnt_nxt) + 1 && n_in == 3'd2) q_nxt[i] = in_data[31:16];
      end
    end
    cnt_nxt = cnt_nxt + n_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < QD; i++) q[i] <= '0;
      cnt        <= '0;
      q_pc       <= BOOT_ADDR;
      fetch_addr <= '0;
      rsp_pend   <= 1'b0;
      skip_low   <= 1'b0;
      boot       <= 1'b1;
    end else begin
      boot <= 1'b0;
      if (redir) begin
        cnt        <= '0;
        q_pc       <= target;
        fetch_addr <= {target[31:2], 2'b00} + 32'd4;
        rsp_pend   <= 1'b1;
        skip_low   <= target[1];
      end else begin
        for (int i = 0; i < QD; i++) q[i] <= q_nxt[i];
        cnt      <= cnt_nxt;
        q_pc     <= q_pc + {28'b0, n_cons, 1'b0};
        rsp_pend <= imem_req;
        skip_low <= 1'b0;
        if (imem_req) fetch_addr <= fetch_addr + 32'd4;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= 3'(QD));
endmodule
