// mmul_core: a 2-stage in-order RV32EC processor with the MMUL custom
// instruction for modular (Montgomery) multiplication.
//
// Stage 1 is fetch_stage (instruction memory, halfword queue, compressed
// expansion). Stage 2 decodes, reads the register file, executes in the ALU,
// accesses data memory through the LSU, handles CSRs and traps, and writes
// back, all for one instruction at a time. Most instructions spend one cycle
// in stage 2; a load spends two (request, then data from the one-cycle memory);
// MMUL stays until the mmul_unit says done. Taken branches, jumps, traps and
// mret redirect the fetch stage and cost one bubble.
//
// MMUL is wired into the datapath as the paper shows it: while it runs it
// steers register-file read port A to the base register it needs (rs1 = A,
// rs2 = B, rs3 = N, rd = result address), the ALU adds MMUL's offset to that
// base, and the sum is the address MMUL has the LSU load from or store to;
// MMUL sends write data to the LSU and receives read data from it. The custom
// CSR mmulcfg (0x7C0), bit 0, is the execution mode select: atomic or partial.
//
// Interrupts: one level-sensitive machine external interrupt (irq_i). It is
// taken only between instructions, never inside one, so an atomic MMUL delays
// it by the whole multiplication while partial execution limits the delay to
// one MMUL call. Traps (interrupt, illegal instruction, ECALL, EBREAK) jump to
// mtvec with mepc pointing at the instruction not executed.
//
// Memory ports: imem (word reads, data one cycle after the request) and dmem
// (word address with byte enables, read data one cycle after the request),
// neither with wait states. The stage split, the MMUL datapath sharing and the
// partial execution CSR follow the paper; the interrupt/trap scheme, the CSR
// number and the memory port protocol are this design's choices.
module mmul_core
  import rv_pkg::*;
#(
  parameter int unsigned MAX_BITS  = 128,
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        irq_i,
  // instruction memory
  output logic        imem_req,
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // data memory
  output logic        dmem_req,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_addr,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata
);
  // ---------------- stage 1 ----------------
  logic        iv, ic, ic_ill, iready;
  logic [31:0] inst, ipc;
  logic        redirect;
  logic [31:0] redirect_pc;

  fetch_stage #(.BOOT_ADDR(BOOT_ADDR)) u_fetch (
    .clk, .rst_n,
    .imem_req, .imem_addr, .imem_rdata,
    .instr_valid(iv), .instr(inst), .instr_pc(ipc), .instr_c(ic),
    .instr_illegal_c(ic_ill), .instr_ready(iready),
    .redirect, .redirect_pc
  );

  // ---------------- stage 2 ----------------
  dec_t dec;
  decoder u_dec (.inst, .dec);

  // register file
  logic [3:0]  ra_addr;
  logic [31:0] rs1_val, rs2_val;
  logic        rf_we;
  logic [31:0] rf_wdata;

  regfile u_rf (
    .clk, .rst_n,
    .raddr_a(ra_addr), .rdata_a(rs1_val),
    .raddr_b(dec.rs2), .rdata_b(rs2_val),
    .we(rf_we), .waddr(dec.rd), .wdata(rf_wdata)
  );

  // MMUL
  logic        mmul_start, mmul_done, mmul_len_ok, mmul_partial;
  logic [1:0]  mmul_reg_sel;
  logic [31:0] mmul_offset;
  logic        mmul_mem_req, mmul_mem_we;
  logic [31:0] mmul_mem_wdata;
  logic [31:0] lsu_rdata;
  logic        lsu_rvalid;
  logic        mmul_active, mmul_busy;

  mmul_unit #(.MAX_BITS(MAX_BITS)) u_mmul (
    .clk, .rst_n,
    .start(mmul_start), .partial(mmul_partial), .len(dec.mmul_len),
    .len_ok(mmul_len_ok), .done(mmul_done),
    .reg_sel(mmul_reg_sel), .offset(mmul_offset),
    .mem_req(mmul_mem_req), .mem_we(mmul_mem_we), .mem_wdata(mmul_mem_wdata),
    .mem_rdata(lsu_rdata), .mem_rvalid(lsu_rvalid),
    .active(mmul_active), .busy(mmul_busy)
  );

  // CSRs
  logic        trap, mret;
  logic [31:0] trap_cause, csr_rdata, mtvec, mepc;
  logic        irq_pending;
  csr_op_e     csr_op;

  csr_unit u_csr (
    .clk, .rst_n,
    .csr_op, .csr_addr(dec.csr_addr),
    .csr_wdata(dec.csr_imm ? dec.imm : rs1_val), .csr_rdata,
    .trap_i(trap), .trap_pc(ipc), .trap_cause, .mret_i(mret),
    .irq_i, .irq_pending, .mtvec_o(mtvec), .mepc_o(mepc),
    .mmul_partial
  );

  // control state of stage 2
  logic in_progress;   // current instruction has already spent a cycle here
  logic ld_wait;       // load issued, data arrives this cycle

  logic illegal, take_irq, exc, ok;
  assign illegal  = ic_ill | dec.illegal | (dec.mmul & ~mmul_len_ok);
  assign take_irq = iv & irq_pending & ~in_progress;
  assign exc      = iv & ~take_irq & (illegal | dec.ecall | dec.ebreak);
  assign ok       = iv & ~take_irq & ~exc;   // instruction executes normally

  always_comb begin
    if (take_irq)          trap_cause = CAUSE_M_EXT_IRQ;
    else if (illegal)      trap_cause = CAUSE_ILLEGAL;
    else if (dec.ecall)    trap_cause = CAUSE_ECALL_M;
    else                   trap_cause = CAUSE_BREAK;
  end
  assign trap = take_irq | exc;
  assign mret = ok & dec.mret;

  assign mmul_start = ok & dec.mmul;
  assign ra_addr = (ok & dec.mmul) ?
                   ((mmul_reg_sel == 2'd0) ? dec.rs1 :
                    (mmul_reg_sel == 2'd1) ? dec.rs2 :
                    (mmul_reg_sel == 2'd2) ? dec.rs3 : dec.rd) : dec.rs1;

  // ALU
  logic [31:0] alu_a, alu_b, alu_y;
  logic        eq, lt, ltu;
  alu_op_e     alu_op;
  always_comb begin
    if (dec.mmul) begin
      alu_op = ALU_ADD;
      alu_a  = rs1_val;          // operand base address (port A steered by MMUL)
      alu_b  = mmul_offset;
    end else begin
      alu_op = dec.alu_op;
      unique case (dec.opa_sel)
        OPA_PC:   alu_a = ipc;
        OPA_ZERO: alu_a = '0;
        default:  alu_a = rs1_val;
      endcase
      alu_b = (dec.opb_sel == OPB_IMM) ? dec.imm : rs2_val;
    end
  end
  alu u_alu (.op(alu_op), .a(alu_a), .b(alu_b), .result(alu_y), .eq, .lt, .ltu);

  // branches and jumps (compare uses rs1/rs2; branch target has its own adder)
  logic br_taken;
  always_comb begin
    unique case (dec.br_type)
      BR_EQ:   br_taken = eq;
      BR_NE:   br_taken = ~eq;
      BR_LT:   br_taken = lt;
      BR_GE:   br_taken = ~lt;
      BR_LTU:  br_taken = ltu;
      BR_GEU:  br_taken = ~ltu;
      default: br_taken = 1'b0;
    endcase
  end
  logic [31:0] link;
  assign link = ipc + (ic ? 32'd2 : 32'd4);

  // LSU
  logic        lsu_req, lsu_we;
  mem_size_e   lsu_size;
  logic [31:0] lsu_wdata;
  assign lsu_req   = ok & ((dec.mem_rd & ~ld_wait) | dec.mem_wr | (dec.mmul & mmul_mem_req));
  assign lsu_we    = dec.mmul ? mmul_mem_we : dec.mem_wr;
  assign lsu_size  = dec.mmul ? MEM_W : dec.mem_size;
  assign lsu_wdata = dec.mmul ? mmul_mem_wdata : rs2_val;

  lsu u_lsu (
    .clk, .rst_n,
    .req(lsu_req), .we(lsu_we), .size(lsu_size), .uns(dec.mem_uns),
    .addr(alu_y), .wdata(lsu_wdata), .rdata(lsu_rdata), .rvalid(lsu_rvalid),
    .dmem_req, .dmem_we, .dmem_be, .dmem_addr, .dmem_wdata, .dmem_rdata
  );

  // retire / stall
  logic retire;
  always_comb begin
    retire = 1'b0;
    if (ok) begin
      if (dec.mem_rd)    retire = ld_wait;
      else if (dec.mmul) retire = mmul_done;
      else               retire = 1'b1;
    end
  end
  assign iready = retire;
  assign csr_op = (ok && dec.csr_op != CSR_NONE) ? dec.csr_op : CSR_NONE;

  // write back
  assign rf_we = retire & dec.rf_we;
  always_comb begin
    if (dec.jal | dec.jalr)            rf_wdata = link;
    else if (dec.mem_rd)               rf_wdata = lsu_rdata;
    else if (dec.csr_op != CSR_NONE)   rf_wdata = csr_rdata;
    else                               rf_wdata = alu_y;
  end

  // control flow
  always_comb begin
    redirect    = 1'b0;
    redirect_pc = ipc + dec.imm;
    if (trap) begin
      redirect    = 1'b1;
      redirect_pc = mtvec;
    end else if (mret) begin
      redirect    = 1'b1;
      redirect_pc = mepc;
    end else if (ok && dec.jalr) begin
      redirect    = 1'b1;
      redirect_pc = {alu_y[31:1], 1'b0};
    end else if (ok && (dec.jal || br_taken)) begin
      redirect    = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_progress <= 1'b0;
      ld_wait     <= 1'b0;
    end else begin
      in_progress <= ok & ~retire;
      ld_wait     <= ok & dec.mem_rd & ~ld_wait;
    end
  end
endmodule
